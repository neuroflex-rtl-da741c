// tb_nf_util: reference functions shared by the NeuroFlex testbenches.
//
// qcfs_ref is the integer QCFS activation written with a floor division,
// independent of the comparator ladder used in the design. pack_line builds
// a bitmap-compressed line from dense INT8 values.
package tb_nf_util;
  import nf_pkg::*;

  function automatic int floor_div(int a, int b);
    int q;
    q = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) q = q - 1;
    return q;
  endfunction

  function automatic int qcfs_ref(int acc, int theta, int levels);
    int q;
    q = floor_div(acc + theta / 2, theta);
    if (q < 0) q = 0;
    if (q > levels) q = levels;
    return q;
  endfunction

  function automatic line_t pack_line(logic [CHUNK-1:0][7:0] dense, logic last, ptr_t next);
    line_t l;
    int k;
    l = '0;
    k = 0;
    for (int i = 0; i < CHUNK; i++)
      if (dense[i] != 8'd0) begin
        l.mask[i] = 1'b1;
        l.vals[k] = dense[i];
        k++;
      end
    l.last = last;
    l.next = next;
    return l;
  endfunction

  // random dense chunk: density in percent, values in [lo, hi] without zero
  function automatic logic [CHUNK-1:0][7:0] rand_dense(int density, int lo, int hi);
    logic [CHUNK-1:0][7:0] d;
    int v;
    d = '0;
    for (int i = 0; i < CHUNK; i++)
      if (int'($urandom_range(99)) < density) begin
        v = lo + int'($urandom_range(hi - lo));
        if (v == 0) v = (hi > 0) ? hi : lo;
        d[i] = 8'(v);
      end
    return d;
  endfunction
endpackage
