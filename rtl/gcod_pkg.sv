// gcod_pkg: types and constants shared by the two-pronged GCN accelerator.
//
// Numbers are 32-bit signed fixed point, the precision used for the main
// configuration (4096 PEs, 32-bit fixed point). The split into 16 integer and
// 16 fraction bits (Q16.16) is this design's choice. A product is rounded
// toward minus infinity (arithmetic shift) and wraps on overflow.
//
// Sparse entries carry 16-bit node/feature indices; a COO entry packs
// {row, col, value}, a CSC entry packs {row, value} and the CSC column
// pointers are plain 16-bit offsets.
package gcod_pkg;

  localparam int DATA_W = 32;
  localparam int FRAC_W = 16;
  localparam int IDX_W  = 16;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic        [IDX_W-1:0]  idx_t;

  // One non-zero of a sparse matrix in coordinate (COO) format.
  typedef struct packed {
    idx_t  row;
    idx_t  col;
    data_t val;
  } coo_t;

  // One non-zero of a column in compressed sparse column (CSC) format.
  typedef struct packed {
    idx_t  row;
    data_t val;
  } csc_t;

  // Element-wise activation applied on a result row.
  typedef enum logic [1:0] {
    ACT_NONE = 2'd0,
    ACT_RELU = 2'd1,
    ACT_LUT  = 2'd2
  } act_mode_e;

  // Adder input selection of a PE (Fig. 6(b): Const. 0 or a partial sum).
  typedef enum logic {
    PE_ADD_ZERO = 1'b0,
    PE_ADD_ACC  = 1'b1
  } pe_add_e;

  // Output stage of the SpMM engine.
  typedef enum logic {
    SPMM_ELEMWISE = 1'b0,
    SPMM_INNER    = 1'b1
  } spmm_mode_e;

  // Buffers reachable through the load port (the DMA side of each buffer).
  typedef enum logic [2:0] {
    LD_FBUF   = 3'd0,  // chunk input buffer, COO entries
    LD_WBUF   = 3'd1,  // chunk weight buffer, dense rows
    LD_IDX    = 3'd2,  // chunk index buffer: weight row range and output range
    LD_CPTR   = 3'd3,  // sparser branch CSC column pointers
    LD_CENT   = 3'd4,  // sparser branch CSC entries
    LD_LUT    = 3'd5   // activation lookup table
  } ld_target_e;

  // Commands of a denser-branch chunk.
  typedef enum logic [1:0] {
    CHUNK_SPMM = 2'd0,  // walk FBuf: OBuf[row] += val * WBuf[col]
    CHUNK_COPY = 2'd1,  // WBuf[r] = act(OBuf[r]) for its output rows
    CHUNK_CLR  = 2'd2   // mark every OBuf row empty
  } chunk_cmd_e;

  // Top-level operations.
  typedef enum logic [1:0] {
    OP_COMBINE   = 2'd0,  // all chunks run CHUNK_SPMM (combination X*W)
    OP_FORWARD   = 2'd1,  // all chunks run CHUNK_COPY (X*W rows become weights)
    OP_AGGREGATE = 2'd2,  // both branches aggregate, then output sync
    OP_CLEAR     = 2'd3   // all chunks run CHUNK_CLR
  } op_e;

  // Fixed-point multiply, Q16.16 x Q16.16 -> Q16.16.
  function automatic data_t fx_mul(data_t a, data_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return data_t'(p >>> FRAC_W);
  endfunction

endpackage
