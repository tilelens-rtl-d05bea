// tilelens_pkg: types and constants shared by the tile-major TMA extension and the
// HBF memory-side blocks.
//
// A TMA descriptor describes a global tensor of up to five dimensions. Dimension 0 is the
// contiguous one (stride 1 element); strides of dimensions 1..4 are given in elements.
// The tile-major extension adds three fields to it: the memory tile shape (a, b), given as
// log2 values because both are powers of two, and the leading stride K, which tells
// which dimensions walk along columns (stride >= K) and which along rows (stride < K).
// A load command gives the logical coordinates of the box origin, the box size per
// dimension and the shared-memory destination address.
//
// Widths are this design's choice: 32-bit coordinates and strides (the extension is sized
// for 32-bit comparators and adders), 48-bit byte addresses.
package tilelens_pkg;

  localparam int unsigned MAX_DIMS  = 5;             // TMA tensors have up to 5 dims
  localparam int unsigned MAX_CNT   = MAX_DIMS + 1;  // one dimension may split in two
  localparam int unsigned ADDR_W    = 48;            // byte address width
  localparam int unsigned CRD_W     = 32;            // coordinate / stride / box width
  localparam int unsigned SMEM_W    = 24;            // shared-memory address width
  localparam int unsigned LGMS_LOG2 = 12;            // 4 KB access granularity
  localparam int unsigned LINE_LOG2 = 7;             // 128 B L2 line / HBM MSHR entry

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [CRD_W-1:0]  crd_t;

  typedef struct packed {
    addr_t                      global_base;  // byte address, LGMS-aligned for tile-major
    logic [2:0]                 rank;         // number of dimensions, 1..5
    crd_t [MAX_DIMS-1:0]        stride;       // stride[0] is ignored (always 1)
    logic [1:0]                 elem_log2;    // log2 of element size s in bytes
    // TileLens-HW fields
    logic                       tile_major;   // 0: plain column-major TMA behaviour
    logic [4:0]                 log2_a;       // memory tile height a (contiguous dim)
    logic [4:0]                 log2_b;       // memory tile width b
    crd_t                       lead_stride;  // K, leading stride in elements
  } tma_desc_t;

  typedef struct packed {
    crd_t [MAX_DIMS-1:0]        coord;        // logical coordinates of the box origin
    crd_t [MAX_DIMS-1:0]        box;          // box size per dimension (box[0] = u)
    logic [SMEM_W-1:0]          smem_dst;     // shared-memory destination byte address
  } tma_cmd_t;

  // One memory request produced by the TMA: u*s contiguous bytes.
  typedef struct packed {
    addr_t                      src;
    logic [SMEM_W-1:0]          dst;
    logic [8:0]                 bytes;
    logic                       last;
  } tma_req_t;

  // Counter programme for the address-generation phase (inner counter first).
  typedef struct packed {
    logic [2:0]                 n;            // number of counters in use (0..MAX_CNT)
    crd_t [MAX_CNT-1:0]         stride;       // element stride of each counter
    crd_t [MAX_CNT-1:0]         extent;       // number of steps of each counter
  } cnt_prog_t;

  // log2 of a power of two (position of the highest set bit).
  function automatic logic [4:0] clog2_pow2(input crd_t x);
    logic [4:0] r;
    r = '0;
    for (int k = 0; k < CRD_W; k++) if (x[k]) r = 5'(k);
    return r;
  endfunction

endpackage
