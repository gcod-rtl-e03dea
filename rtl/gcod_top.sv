// gcod_top: the two-pronged GCN accelerator.
//
// The adjacency matrix, after split-and-conquer training, is mostly a set of
// dense diagonal blocks (subgraphs of nodes with similar degree, one class per
// chunk) plus a light, irregular remainder off the diagonal. This top puts the
// two workloads on two branches that run in parallel:
//   denser branch : NUM_CHUNKS dense_chunk sub-accelerators, each doing COO
//                   SpMM over its diagonal block with its own FBuf, WBuf,
//                   OBuf and IdxBuf;
//   sparser branch: one sparse_subacc that walks the off-diagonal non-zeros in
//                   CSC order (distributed aggregation), gets each needed row
//                   of X*W from a chunk's WBuf through weight_forwarding or,
//                   failing that, from off-chip memory, and finally adds its
//                   results to the chunks' results in its output sync;
//   gcod_controller sequences the operations.
// Interfaces: a load port (ld_*) writes any buffer, index buffer or activation
// table (ld_unit selects chunk 0..NUM_CHUNKS-1 or the sparser branch
// NUM_CHUNKS; LD_LUT writes every unit's table); cmd_valid/cmd_op start an
// operation (see gcod_controller) and done pulses at its end; the hbm_* port
// serves row reads of X*W that missed on chip (a request is a one-cycle pulse,
// the row comes back any number of cycles later with hbm_rvalid); result rows
// leave on out_valid/out_row/out_data during an aggregation's output sync.
// Counters on the state bus report forwarding hits and misses, off-chip
// reads, skipped columns, sampled columns and dropped entries.
// The branch structure, CSC/COO formats, weight forwarding and output sync
// follow the paper. Equal PE counts per sub-accelerator (LANES each, so
// 4 x 1024 = 4096 PEs by default), the buffer depths and the port protocol
// are this design's choices.
module gcod_top
  import gcod_pkg::*;
#(
  parameter int LANES      = 1024,
  parameter int NUM_CHUNKS = 3,
  parameter int FDEPTH     = 8192,
  parameter int WDEPTH     = 256,
  parameter int ODEPTH     = 256,
  parameter int N_NODES    = 768,
  parameter int EDEPTH     = 8192,
  parameter int LUT_AW     = 8,
  localparam int ROW_W     = LANES * DATA_W,
  localparam int UW        = $clog2(NUM_CHUNKS + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // load port
  input  logic                        ld_we,
  input  ld_target_e                  ld_target,
  input  logic [UW-1:0]               ld_unit,
  input  idx_t                        ld_addr,
  input  logic [ROW_W-1:0]            ld_data,
  // operation
  input  logic                        cmd_valid,
  input  op_e                         cmd_op,
  input  idx_t [NUM_CHUNKS-1:0]       chunk_nnz,
  input  act_mode_e                   chunk_act,   // activation on CHUNK_COPY
  input  idx_t                        col_lo,
  input  idx_t                        col_hi,
  input  idx_t                        n_sample,
  input  idx_t                        first_row,
  input  idx_t                        n_rows,
  input  act_mode_e                   out_act,     // activation on output sync
  output logic                        busy,
  output logic                        done,
  // off-chip memory (row reads of X*W)
  output logic                        hbm_req,
  output idx_t                        hbm_row,
  input  logic                        hbm_rvalid,
  input  logic [ROW_W-1:0]            hbm_rdata,
  // results
  output logic                        out_valid,
  output idx_t                        out_row,
  output logic [ROW_W-1:0]            out_data,
  // state bus
  output logic [2:0]                  ctrl_state,
  output logic [31:0]                 op_cycles,
  output logic [31:0]                 fwd_hits,
  output logic [31:0]                 fwd_misses,
  output logic [31:0]                 hbm_reads,
  output logic [31:0]                 cols_skipped,
  output logic [31:0]                 cols_sampled,
  output logic [31:0]                 dropped
);
  // ---------------- controller ----------------
  logic              ck_cmd_valid;
  chunk_cmd_e        ck_cmd;
  logic [NUM_CHUNKS-1:0] ck_done, ck_busy;
  logic              sp_agg_start, sp_agg_done, sp_agg_busy;
  logic              sp_sync_start, sp_sync_done, sp_sync_busy;

  gcod_controller #(.NUM_CHUNKS(NUM_CHUNKS)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .op(cmd_op),
    .busy, .done,
    .ck_cmd_valid, .ck_cmd, .ck_done,
    .sp_agg_start, .sp_agg_done,
    .sp_sync_start, .sp_sync_done,
    .state (ctrl_state),
    .cycles(op_cycles)
  );

  // ---------------- denser branch ----------------
  idx_t                                fq_row;
  logic [NUM_CHUNKS-1:0]               fq_hit, fq_rd;
  logic [NUM_CHUNKS-1:0][ROW_W-1:0]    fq_data;
  logic                                ds_rd;
  idx_t                                ds_row;
  logic [NUM_CHUNKS-1:0]               or_hit;
  logic [NUM_CHUNKS-1:0][ROW_W-1:0]    or_data;
  idx_t [NUM_CHUNKS-1:0]               ck_dropped;
  idx_t [NUM_CHUNKS-1:0]               ck_wb, ck_wc, ck_ob, ck_oc;

  for (genvar k = 0; k < NUM_CHUNKS; k++) begin : g_chunk
    dense_chunk #(
      .LANES(LANES), .FDEPTH(FDEPTH), .WDEPTH(WDEPTH), .ODEPTH(ODEPTH), .LUT_AW(LUT_AW)
    ) u_chunk (
      .clk, .rst_n,
      .ld_we    (ld_we && (ld_unit == UW'(k) || ld_target == LD_LUT)),
      .ld_target, .ld_addr, .ld_data,
      .cmd_valid(ck_cmd_valid),
      .cmd      (ck_cmd),
      .nnz      (chunk_nnz[k]),
      .act_mode (chunk_act),
      .busy     (ck_busy[k]),
      .done     (ck_done[k]),
      .dropped  (ck_dropped[k]),
      .fq_row   (fq_row),
      .fq_hit   (fq_hit[k]),
      .fq_rd    (fq_rd[k]),
      .fq_data  (fq_data[k]),
      .or_row   (ds_row),
      .or_hit   (or_hit[k]),
      .or_rd    (ds_rd),
      .or_data  (or_data[k]),
      .w_base   (ck_wb[k]),
      .w_count  (ck_wc[k]),
      .o_base   (ck_ob[k]),
      .o_count  (ck_oc[k])
    );
  end

  // Denser-branch readout for the output sync: the first chunk whose output
  // range holds the row answers; a row no chunk owns reads as zero.
  logic [NUM_CHUNKS-1:0] or_hit_q;
  logic [ROW_W-1:0]      ds_data;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     or_hit_q <= '0;
    else if (ds_rd) or_hit_q <= or_hit;
  end
  always_comb begin
    ds_data = '0;
    for (int k = NUM_CHUNKS - 1; k >= 0; k--)
      if (or_hit_q[k]) ds_data = or_data[k];
  end

  // ---------------- query-based weight forwarding ----------------
  logic             q_valid, resp_valid, resp_hit;
  idx_t             q_row;
  logic [ROW_W-1:0] resp_data;

  weight_forwarding #(.NUM_CHUNKS(NUM_CHUNKS), .LANES(LANES)) u_fwd (
    .clk, .rst_n,
    .q_valid, .q_row,
    .resp_valid, .resp_hit, .resp_data,
    .fq_row, .fq_hit, .fq_rd, .fq_data,
    .n_hits  (fwd_hits),
    .n_misses(fwd_misses)
  );

  // ---------------- sparser branch ----------------
  logic [31:0] sp_cols_done, sp_dropped;

  sparse_subacc #(
    .LANES(LANES), .N_NODES(N_NODES), .EDEPTH(EDEPTH), .LUT_AW(LUT_AW)
  ) u_sparse (
    .clk, .rst_n,
    .ld_we    (ld_we && (ld_unit == UW'(NUM_CHUNKS) || ld_target == LD_LUT)),
    .ld_target, .ld_addr, .ld_data,
    .agg_start(sp_agg_start),
    .col_lo, .col_hi, .n_sample,
    .agg_busy (sp_agg_busy),
    .agg_done (sp_agg_done),
    .sync_start(sp_sync_start),
    .first_row, .n_rows,
    .act_mode (out_act),
    .sync_busy(sp_sync_busy),
    .sync_done(sp_sync_done),
    .q_valid, .q_row,
    .resp_valid, .resp_hit, .resp_data,
    .hbm_req, .hbm_row, .hbm_rvalid, .hbm_rdata,
    .ds_rd, .ds_row, .ds_data,
    .out_valid, .out_row, .out_data,
    .n_cols_done   (sp_cols_done),
    .n_cols_skipped(cols_skipped),
    .n_hbm_reads   (hbm_reads),
    .n_sampled_cols(cols_sampled),
    .n_dropped     (sp_dropped)
  );

  always_comb begin
    dropped = sp_dropped;
    for (int k = 0; k < NUM_CHUNKS; k++) dropped += 32'(ck_dropped[k]);
  end
endmodule
