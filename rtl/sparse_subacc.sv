// sparse_subacc: the sub-accelerator of the sparser branch.
//
// It handles the off-diagonal, lightly loaded part of the adjacency matrix,
// held on chip in CSC format: a column-pointer array (colptr[c] is the first
// entry of column c, colptr[c+1] one past the last) and an entry array of
// {row, value}. It aggregates in the distributed manner: one column c at a
// time, it obtains row c of X*W once and multiplies it with every non-zero of
// column c, adding value * XW[c] into its own output buffer row of each
// non-zero's row (OBuf, one row per node, with a valid bit each).
// Row c of X*W is obtained by query-based weight forwarding: it asks the
// denser-branch chunks (q_* / resp_*) and, if none holds the row, reads it
// from off-chip memory (hbm_* port, one outstanding request). Empty columns
// are skipped without a query. With n_sample > 0 the sampling unit limits each
// column to n_sample randomly picked non-zeros (node sampling).
// After both branches have finished, sync_start runs the output
// synchronization: rows of this OBuf and of the chunks' OBufs are added,
// activated and streamed out on out_*.
// Timing: per non-empty column, 2 cycles to read the column pointers, 2
// cycles for a forwarded row (or 2 plus the memory latency for a miss), 1
// cycle to start sampling, then one non-zero per cycle through a three-stage
// pipeline (entry read, OBuf read, multiply-add and write; the previous
// write is bypassed), and 3 cycles to drain. An empty column costs 2 cycles.
// The CSC format, the distributed aggregation, the query-then-off-chip
// fallback, skipping of empty columns, sampling and the output sync module
// are the paper's; the state machine, one non-zero per cycle and the buffer
// sizes are this design's.
module sparse_subacc
  import gcod_pkg::*;
#(
  parameter int LANES   = 1024,
  parameter int N_NODES = 768,    // OBuf rows, one per node of the tile
  parameter int EDEPTH  = 8192,   // CSC entry buffer
  parameter int LUT_AW  = 8,
  localparam int ROW_W  = LANES * DATA_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // load port
  input  logic               ld_we,
  input  ld_target_e         ld_target,
  input  idx_t               ld_addr,
  input  logic [ROW_W-1:0]   ld_data,
  // aggregation command
  input  logic               agg_start,
  input  idx_t               col_lo,
  input  idx_t               col_hi,      // columns [col_lo, col_hi)
  input  idx_t               n_sample,    // 0: no sampling
  output logic               agg_busy,
  output logic               agg_done,
  // output sync command
  input  logic               sync_start,
  input  idx_t               first_row,
  input  idx_t               n_rows,
  input  act_mode_e          act_mode,
  output logic               sync_busy,
  output logic               sync_done,
  // weight query bus
  output logic               q_valid,
  output idx_t               q_row,
  input  logic               resp_valid,
  input  logic               resp_hit,
  input  logic [ROW_W-1:0]   resp_data,
  // off-chip row reads
  output logic               hbm_req,
  output idx_t               hbm_row,
  input  logic               hbm_rvalid,
  input  logic [ROW_W-1:0]   hbm_rdata,
  // denser-branch readout, for output sync
  output logic               ds_rd,
  output idx_t               ds_row,
  input  logic [ROW_W-1:0]   ds_data,
  // results
  output logic               out_valid,
  output idx_t               out_row,
  output logic [ROW_W-1:0]   out_data,
  // state bus
  output logic [31:0]        n_cols_done,
  output logic [31:0]        n_cols_skipped,
  output logic [31:0]        n_hbm_reads,
  output logic [31:0]        n_sampled_cols,
  output logic [31:0]        n_dropped
);
  localparam int PAW = $clog2(N_NODES + 1);
  localparam int EAW = $clog2(EDEPTH);
  localparam int OAW = $clog2(N_NODES);

  typedef enum logic [2:0] {
    W_IDLE, W_PTR, W_PTR2, W_QWAIT, W_HBM, W_SMP, W_NZ
  } wstate_e;
  wstate_e st;

  // ---------------- buffers ----------------
  logic [1:0][PAW-1:0]     p_raddr;
  logic [1:0][IDX_W-1:0]   p_rdata;
  logic [0:0][EAW-1:0]     e_raddr;
  logic [0:0][$bits(csc_t)-1:0] e_rdata;
  logic                    o_we;
  logic [OAW-1:0]          o_waddr;
  logic [ROW_W-1:0]        o_wdata;
  logic [1:0][OAW-1:0]     o_raddr;
  logic [1:0][ROW_W-1:0]   o_rdata;
  logic [N_NODES-1:0]      o_valid;

  buffer_ram #(.DEPTH(N_NODES + 1), .WIDTH(IDX_W), .NRD(2)) u_cptr (
    .clk, .we(ld_we && ld_target == LD_CPTR && st == W_IDLE), .waddr(PAW'(ld_addr)),
    .wdata(ld_data[IDX_W-1:0]), .raddr(p_raddr), .rdata(p_rdata));

  buffer_ram #(.DEPTH(EDEPTH), .WIDTH($bits(csc_t)), .NRD(1)) u_cent (
    .clk, .we(ld_we && ld_target == LD_CENT && st == W_IDLE), .waddr(EAW'(ld_addr)),
    .wdata(ld_data[$bits(csc_t)-1:0]), .raddr(e_raddr), .rdata(e_rdata));

  buffer_ram #(.DEPTH(N_NODES), .WIDTH(ROW_W), .NRD(2)) u_obuf (
    .clk, .we(o_we), .waddr(o_waddr), .wdata(o_wdata),
    .raddr(o_raddr), .rdata(o_rdata));

  // output sync read side (driven by u_sync below)
  logic              sy_rd;
  idx_t              sy_row;

  // ---------------- column walk ----------------
  idx_t             col, col_end, smp_n;
  idx_t             ptr0, ptr1;
  logic [ROW_W-1:0] xw_row;          // row `col` of X*W
  logic             smp_start, smp_valid, smp_done, smp_busy, smp_sampled, smp_fin;
  logic [IDX_W-1:0] smp_addr;

  sampling_unit #(.AW(IDX_W)) u_smp (
    .clk, .rst_n,
    .start     (smp_start),
    .base      (ptr0),
    .len       (ptr1 - ptr0),
    .n_sample  (smp_n),
    .addr_valid(smp_valid),
    .addr_ready(1'b1),
    .addr      (smp_addr),
    .sampled   (smp_sampled),
    .done      (smp_done),
    .busy      (smp_busy)
  );

  // non-zero pipeline
  logic            e1_v;             // entry word available
  logic            e2_v;             // OBuf word available
  logic [OAW-1:0]  e2_row;
  data_t           e2_val;
  logic            e2_ovalid;
  logic            wr_v;
  logic [OAW-1:0]  wr_row;
  logic [ROW_W-1:0] wr_data;
  csc_t            e1;
  logic            e1_inrange;

  assign e1         = csc_t'(e_rdata[0]);
  assign e1_inrange = ({16'd0, e1.row} < 32'(N_NODES));

  data_t [LANES-1:0] eng_in, eng_out;
  data_t             eng_sum;
  logic              use_byp;
  assign use_byp = wr_v && (wr_row == e2_row);
  always_comb begin
    eng_in    = '0;
    eng_in[0] = e2_val;
  end

  spmm_engine #(.LANES(LANES)) u_spmm (
    .mode   (SPMM_ELEMWISE),
    .bcast  (1'b1),
    .in_vec (eng_in),
    .w_vec  (xw_row),
    .acc_vec(use_byp ? wr_data : o_rdata[0]),
    .acc_en (use_byp || e2_ovalid),
    .out_vec(eng_out),
    .out_sum(eng_sum)
  );

  always_comb begin
    p_raddr[0] = PAW'(col);
    p_raddr[1] = PAW'(col + 1'b1);
    e_raddr[0] = EAW'(smp_addr);
    o_raddr[0] = OAW'(e1.row);
    o_raddr[1] = OAW'(sy_row);
    o_we       = e2_v;
    o_waddr    = e2_row;
    o_wdata    = eng_out;
  end

  assign agg_busy = (st != W_IDLE);
  assign q_row    = col;
  assign hbm_row  = col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st             <= W_IDLE;
      col            <= '0;
      col_end        <= '0;
      smp_n          <= '0;
      ptr0           <= '0;
      ptr1           <= '0;
      xw_row         <= '0;
      q_valid        <= 1'b0;
      hbm_req        <= 1'b0;
      smp_start      <= 1'b0;
      smp_fin        <= 1'b0;
      e1_v           <= 1'b0;
      e2_v           <= 1'b0;
      e2_row         <= '0;
      e2_val         <= '0;
      e2_ovalid      <= 1'b0;
      wr_v           <= 1'b0;
      wr_row         <= '0;
      wr_data        <= '0;
      o_valid        <= '0;
      agg_done       <= 1'b0;
      n_cols_done    <= '0;
      n_cols_skipped <= '0;
      n_hbm_reads    <= '0;
      n_sampled_cols <= '0;
      n_dropped      <= '0;
    end else begin
      agg_done  <= 1'b0;
      q_valid   <= 1'b0;
      hbm_req   <= 1'b0;
      smp_start <= 1'b0;
      // non-zero pipeline
      e1_v <= smp_valid;
      e2_v <= e1_v && e1_inrange;
      if (e1_v && !e1_inrange) n_dropped <= n_dropped + 1;
      e2_row    <= OAW'(e1.row);
      e2_val    <= e1.val;
      e2_ovalid <= o_valid[OAW'(e1.row)];
      wr_v      <= e2_v;
      if (e2_v) begin
        wr_row           <= e2_row;
        wr_data          <= eng_out;
        o_valid[e2_row]  <= 1'b1;
      end
      if (smp_done) smp_fin <= 1'b1;

      unique case (st)
        W_IDLE: begin
          if (agg_start) begin
            col     <= col_lo;
            col_end <= col_hi;
            smp_n   <= n_sample;
            o_valid <= '0;
            n_cols_done    <= '0;
            n_cols_skipped <= '0;
            n_hbm_reads    <= '0;
            n_sampled_cols <= '0;
            n_dropped      <= '0;
            if (col_lo >= col_hi) agg_done <= 1'b1;
            else st <= W_PTR;
          end
        end
        W_PTR: st <= W_PTR2;                // column pointers being read
        W_PTR2: begin
          ptr0 <= p_rdata[0];
          ptr1 <= p_rdata[1];
          if (p_rdata[1] == p_rdata[0]) begin
            // empty column (e.g. a structurally pruned patch): skip it
            n_cols_skipped <= n_cols_skipped + 1;
            n_cols_done    <= n_cols_done + 1;
            if (col + 1'b1 >= col_end) begin
              st       <= W_IDLE;
              agg_done <= 1'b1;
            end else begin
              col <= col + 1'b1;
              st  <= W_PTR;
            end
          end else begin
            q_valid <= 1'b1;
            st      <= W_QWAIT;
          end
        end
        W_QWAIT: begin
          if (resp_valid) begin
            if (resp_hit) begin
              xw_row    <= resp_data;
              smp_start <= 1'b1;
              smp_fin   <= 1'b0;
              st        <= W_SMP;
            end else begin
              hbm_req     <= 1'b1;
              n_hbm_reads <= n_hbm_reads + 1;
              st          <= W_HBM;
            end
          end
        end
        W_HBM: begin
          if (hbm_rvalid) begin
            xw_row    <= hbm_rdata;
            smp_start <= 1'b1;
            smp_fin   <= 1'b0;
            st        <= W_SMP;
          end
        end
        W_SMP: st <= W_NZ;                  // sampling unit starting
        W_NZ: begin
          if ((smp_fin || smp_done) && !smp_valid && !e1_v && !e2_v) begin
            n_cols_done <= n_cols_done + 1;
            if (smp_sampled) n_sampled_cols <= n_sampled_cols + 1;
            if (col + 1'b1 >= col_end) begin
              st       <= W_IDLE;
              agg_done <= 1'b1;
            end else begin
              col <= col + 1'b1;
              st  <= W_PTR;
            end
          end
        end
        default: st <= W_IDLE;
      endcase
    end
  end

  // ---------------- output synchronization ----------------
  logic              sp_valid_q;
  data_t [LANES-1:0] sum_vec, act_vec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sp_valid_q <= 1'b0;
    else if (sy_rd) sp_valid_q <= ({16'd0, sy_row} < 32'(N_NODES)) && o_valid[OAW'(sy_row)];
  end

  assign ds_rd  = sy_rd;
  assign ds_row = sy_row;

  output_sync #(.LANES(LANES)) u_sync (
    .clk, .rst_n,
    .start      (sync_start && st == W_IDLE),
    .first_row,
    .n_rows,
    .busy       (sync_busy),
    .done       (sync_done),
    .rd_en      (sy_rd),
    .rd_row     (sy_row),
    .dense_data (ds_data),
    .sparse_data(sp_valid_q ? o_rdata[1] : '0),
    .sum_vec,
    .act_vec,
    .out_valid,
    .out_row,
    .out_data
  );

  activation_unit #(.LANES(LANES), .LUT_AW(LUT_AW)) u_act (
    .clk,
    .mode     (act_mode),
    .in_vec   (sum_vec),
    .out_vec  (act_vec),
    .lut_we   (ld_we && ld_target == LD_LUT),
    .lut_waddr(ld_addr[LUT_AW-1:0]),
    .lut_wdata(ld_data[DATA_W-1:0])
  );
endmodule
