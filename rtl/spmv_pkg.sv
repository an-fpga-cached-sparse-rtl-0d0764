// spmv_pkg: types and constants shared by the cached SpMV core.
//
// The matrix is kept in an ELLPACK layout with a constant number of stored
// entries per row (five for a tetrahedral mesh with a second-order scheme),
// cut into slices of S rows that are stored column by column. Values are
// IEEE-754 doubles; column indexes are 16-bit positions inside the on-chip
// cache vector rather than global columns. Each slice carries a 64-bit
// header telling how many S-element words of the multiplying vector must be
// loaded before it runs and where in the vector that load starts.
//
// The header bit layout, the address width and the memory port shapes are
// choices of this implementation; the paper only says that the two numbers
// exist.
package spmv_pkg;

  // Paper's main configuration.
  localparam int unsigned S_DEFAULT         = 512;    // rows per slice = wordsize
  localparam int unsigned CACHE_LEN_DEFAULT = 16384;  // cache vector entries (32 words)
  localparam int unsigned NNZ_ROW_DEFAULT   = 5;      // ELLPACK entries per row
  localparam int unsigned NUM_IP_DEFAULT    = 4;      // concurrent cached-SpMV IPs

  localparam int unsigned ADDR_W = 64;   // byte addresses, host pointer width
  localparam int unsigned DATA_W = 64;   // one double per memory beat
  localparam int unsigned COL_W  = 16;   // short-integer cache-relative index
  localparam int unsigned COLS_PER_BEAT = DATA_W / COL_W;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] dword_t;
  typedef logic [COL_W-1:0]  col_t;

  // Per-slice header, one 64-bit word per slice:
  //   [31:0]  offset : element index in x where this slice's load starts
  //   [47:32] nwords : number of S-element words to load (0 = full reuse)
  //   [63:48] reserved, zero
  typedef struct packed {
    logic [15:0] reserved;
    logic [15:0] nwords;
    logic [31:0] offset;
  } slice_hdr_t;

  // Work descriptor of one block of consecutive slices (the task arguments).
  typedef struct packed {
    addr_t       hdr_base;  // slice headers of the block
    addr_t       val_base;  // double values, column-wise per slice
    addr_t       col_base;  // 16-bit cache-relative indexes, same order
    addr_t       x_base;    // multiplying vector (element 0)
    addr_t       y_base;    // result vector, first row of the block
    logic [31:0] n_slices;  // B, slices in the block
  } block_desc_t;

  // Read request / response and write request of a simple in-order memory
  // port (valid/ready handshake on each channel).
  typedef struct packed {
    addr_t  addr;
  } rd_req_t;

  typedef struct packed {
    addr_t  addr;
    dword_t data;
  } wr_req_t;

  // IEEE-754 binary64 helpers.
  localparam logic [10:0] FP_EXP_MAX = 11'h7ff;
  localparam logic [63:0] FP_QNAN    = 64'h7ff8_0000_0000_0000;
  localparam logic [63:0] FP_ZERO    = 64'h0;

  // Pipeline depths of the floating-point units (cycles from in_valid to
  // out_valid); the MAC delays its row tags by the same amounts.
  localparam int unsigned FP_MUL_LAT = 2;
  localparam int unsigned FP_ADD_LAT = 2;

endpackage
