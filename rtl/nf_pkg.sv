// nf_pkg: shared constants and types of the NeuroFlex accelerator.
//
// Data travels as fibers: a fiber is a linked list of lines, each line holding
// a 128-bit presence bitmap, up to 128 packed non-zero INT8 values (lowest
// position first) and a pointer to its continuation line. A PE consumes one
// activation line and one weight line at a time (a chunk). The 128-element
// chunk and the 128-bit bitmask follow the paper's SNN PE description
// (two 128-bit bitmask buffers, a 128-byte weight buffer); the pointer width,
// the job/command layouts and the 16-bit row/column fields are this design's
// own choices.
package nf_pkg;
  localparam int CHUNK = 128;                 // elements per chunk / line
  localparam int POS_W = $clog2(CHUNK);       // position inside a chunk
  localparam int OFF_W = POS_W + 1;           // prefix offset 0..CHUNK
  localparam int PTR_W = 16;                  // global line address
  localparam int IDX_W = 16;                  // row / column index
  localparam int TH_W  = 16;                  // quantisation step width

  typedef logic [PTR_W-1:0] ptr_t;

  // One FiberCache line: bitmap, packed values, continuation pointer.
  typedef struct packed {
    logic [CHUNK-1:0]      mask;
    logic [CHUNK-1:0][7:0] vals;   // vals[i] = i-th non-zero
    logic                  last;   // no continuation line
    ptr_t                  next;   // continuation line address
  } line_t;

  // What a PE works on: the activation line and the weight line of one
  // 128-element slice of the dot product.
  typedef struct packed {
    line_t a;
    line_t b;
  } chunk_t;

  // Execution mode token issued per column (1 = SNN, as the bitmask bit).
  typedef enum logic {
    MODE_ANN = 1'b0,
    MODE_SNN = 1'b1
  } mode_e;

  // One output neuron C[row][col].
  typedef struct packed {
    logic [IDX_W-1:0] row;
    logic [IDX_W-1:0] col;
    ptr_t             a_ptr;   // first line of activation row fiber
    ptr_t             b_ptr;   // first line of weight column fiber
    logic [TH_W-1:0]  theta;   // integer quantisation step
  } job_t;

  typedef struct packed {
    logic [IDX_W-1:0] row;
    logic [IDX_W-1:0] col;
    logic [7:0]       q;       // INT8 activation level
  } result_t;

  // Layer command of the unified command queue.
  typedef struct packed {
    logic [IDX_W-1:0] m_rows;    // M
    logic [IDX_W-1:0] n_cols;    // N
    logic [IDX_W-1:0] kseg;      // lines per fiber = ceil(K/128)
    ptr_t             a_base;    // row m fiber at a_base + m*kseg
    ptr_t             b_base;    // column n fiber at b_base + n*kseg
    ptr_t             out_base;  // output row m, segment j at out_base + m*nseg + j
    logic [TH_W-1:0]  theta;
    logic [IDX_W-1:0] mask_base; // first bit of this layer's mode bitmask
  } cmd_t;
endpackage
