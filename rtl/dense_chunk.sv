// dense_chunk: one sub-accelerator ("chunk") of the denser branch.
//
// A chunk serves one class of subgraphs (nodes of similar degree). It holds:
//   FBuf  - the non-zeros of its input in COO format (row, col, value);
//   WBuf  - dense weight rows [w_base, w_base+w_count) (rows of W during
//           combination, rows of X*W during aggregation);
//   IdxBuf- that weight-row range and the chunk's output-row range;
//   OBuf  - dense output rows [o_base, o_base+o_count) with a valid bit each;
//   an SpMM engine of LANES PEs and an activation unit.
// Commands (cmd_valid with cmd, accepted when not busy):
//   CHUNK_SPMM: for each of the first nnz FBuf entries,
//               OBuf[row] += value * WBuf[col]. Rows never written read as 0;
//               an OBuf row that is not yet valid makes the PEs add Const. 0.
//               Entries whose row or col fall outside the chunk's ranges are
//               dropped and counted in dropped.
//   CHUNK_COPY: WBuf[r] = act(OBuf[r]) for every output row, then the weight
//               range becomes the output range and OBuf is emptied: the rows of
//               X*W just combined are the weights of the next aggregation,
//               kept on chip (the efficiency-aware inter-phase pipeline).
//   CHUNK_CLR : empty OBuf in one cycle.
// Timing: SPMM takes nnz + 3 cycles (one non-zero per cycle through a
// three-stage pipeline: FBuf read, WBuf/OBuf read, multiply-add and write).
// A non-zero that hits the output row written in the previous cycle takes
// that row from a bypass register, so back-to-back entries of one row need no
// stall. COPY takes o_count + 3 cycles. done pulses one cycle at the end.
// Side ports: the query port lets the sparser branch read a WBuf row (second
// WBuf read port, result one cycle after fq_rd), and the readout port reads
// an OBuf row (second OBuf read port, one cycle latency, zeros if empty).
// The paper gives the chunk's role, its buffers and units and the COO input;
// the command set, pipeline, ports and buffer depths are this design's.
module dense_chunk
  import gcod_pkg::*;
#(
  parameter int LANES  = 1024,
  parameter int FDEPTH = 8192,
  parameter int WDEPTH = 256,
  parameter int ODEPTH = 256,
  parameter int LUT_AW = 8,
  localparam int ROW_W = LANES * DATA_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // load port (DMA side of the buffers)
  input  logic               ld_we,
  input  ld_target_e         ld_target,
  input  idx_t               ld_addr,
  input  logic [ROW_W-1:0]   ld_data,
  // command
  input  logic               cmd_valid,
  input  chunk_cmd_e         cmd,
  input  idx_t               nnz,
  input  act_mode_e          act_mode,
  output logic               busy,
  output logic               done,
  output idx_t               dropped,
  // weight query port (query-based weight forwarding)
  input  idx_t               fq_row,
  output logic               fq_hit,
  input  logic               fq_rd,
  output logic [ROW_W-1:0]   fq_data,
  // output readout port (output sync)
  input  idx_t               or_row,
  output logic               or_hit,
  input  logic               or_rd,
  output logic [ROW_W-1:0]   or_data,
  // index buffer contents
  output idx_t               w_base,
  output idx_t               w_count,
  output idx_t               o_base,
  output idx_t               o_count
);
  localparam int FAW = $clog2(FDEPTH);
  localparam int WAW = $clog2(WDEPTH);
  localparam int OAW = $clog2(ODEPTH);

  typedef enum logic [1:0] {S_IDLE, S_SPMM, S_COPY} state_e;
  state_e state;

  // ---------------- index buffer ----------------
  logic idx_we, idx_copy;
  idx_t fq_addr, or_addr;
  assign idx_we = ld_we && ld_target == LD_IDX && state == S_IDLE;

  index_buffer u_idx (
    .clk, .rst_n,
    .we        (idx_we),
    .w_base_in (ld_data[0*IDX_W +: IDX_W]),
    .w_count_in(ld_data[1*IDX_W +: IDX_W]),
    .o_base_in (ld_data[2*IDX_W +: IDX_W]),
    .o_count_in(ld_data[3*IDX_W +: IDX_W]),
    .copy      (idx_copy),
    .w_base, .w_count, .o_base, .o_count,
    .q_row (fq_row), .q_hit(fq_hit), .q_addr(fq_addr),
    .o_row (or_row), .o_hit(or_hit), .o_addr(or_addr)
  );

  // ---------------- buffers ----------------
  logic                     f_we;
  logic [FAW-1:0]           f_waddr;
  logic [0:0][FAW-1:0]      f_raddr;
  logic [0:0][$bits(coo_t)-1:0] f_rdata;

  logic                     w_we;
  logic [WAW-1:0]           w_waddr;
  logic [ROW_W-1:0]         w_wdata;
  logic [1:0][WAW-1:0]      w_raddr;
  logic [1:0][ROW_W-1:0]    w_rdata;

  logic                     o_we;
  logic [OAW-1:0]           o_waddr;
  logic [ROW_W-1:0]         o_wdata;
  logic [1:0][OAW-1:0]      o_raddr;
  logic [1:0][ROW_W-1:0]    o_rdata;
  logic [ODEPTH-1:0]        o_valid;

  assign f_we    = ld_we && ld_target == LD_FBUF && state == S_IDLE;
  assign f_waddr = FAW'(ld_addr);

  buffer_ram #(.DEPTH(FDEPTH), .WIDTH($bits(coo_t)), .NRD(1)) u_fbuf (
    .clk, .we(f_we), .waddr(f_waddr), .wdata(ld_data[$bits(coo_t)-1:0]),
    .raddr(f_raddr), .rdata(f_rdata));

  buffer_ram #(.DEPTH(WDEPTH), .WIDTH(ROW_W), .NRD(2)) u_wbuf (
    .clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata),
    .raddr(w_raddr), .rdata(w_rdata));

  buffer_ram #(.DEPTH(ODEPTH), .WIDTH(ROW_W), .NRD(2)) u_obuf (
    .clk, .we(o_we), .waddr(o_waddr), .wdata(o_wdata),
    .raddr(o_raddr), .rdata(o_rdata));

  // ---------------- pipeline registers ----------------
  idx_t            cnt;        // FBuf pointer (SPMM) or row counter (COPY)
  idx_t            nnz_q;
  logic            s1_v;       // FBuf word available
  logic            s2_v;       // WBuf/OBuf words available
  logic [OAW-1:0]  s2_orow;
  logic            s2_ovalid;
  data_t           s2_val;
  logic            wr_v;       // a row was written last cycle (bypass source)
  logic [OAW-1:0]  wr_row;
  logic [ROW_W-1:0] wr_data;
  logic            c1_v;       // COPY: OBuf word available
  logic [OAW-1:0]  c1_row;
  logic            c1_valid;

  coo_t s1_e;
  logic s1_whit, s1_ohit;
  logic [IDX_W:0] w_end, o_end;
  assign s1_e    = coo_t'(f_rdata[0]);
  assign w_end   = {1'b0, w_base} + {1'b0, w_count};
  assign o_end   = {1'b0, o_base} + {1'b0, o_count};
  assign s1_whit = (s1_e.col >= w_base) && ({1'b0, s1_e.col} < w_end);
  assign s1_ohit = (s1_e.row >= o_base) && ({1'b0, s1_e.row} < o_end);

  // ---------------- SpMM engine and activation ----------------
  data_t [LANES-1:0] eng_in, eng_w, eng_acc, eng_out, act_in, act_out;
  data_t             eng_sum;
  logic              use_byp;

  assign use_byp = wr_v && (wr_row == s2_orow);
  always_comb begin
    eng_in    = '0;
    eng_in[0] = s2_val;
  end
  assign eng_w   = w_rdata[0];
  assign eng_acc = use_byp ? wr_data : o_rdata[0];

  spmm_engine #(.LANES(LANES)) u_spmm (
    .mode   (SPMM_ELEMWISE),
    .bcast  (1'b1),
    .in_vec (eng_in),
    .w_vec  (eng_w),
    .acc_vec(eng_acc),
    .acc_en (use_byp || s2_ovalid),
    .out_vec(eng_out),
    .out_sum(eng_sum)
  );

  assign act_in = c1_valid ? o_rdata[0] : '0;

  activation_unit #(.LANES(LANES), .LUT_AW(LUT_AW)) u_act (
    .clk,
    .mode     (act_mode),
    .in_vec   (act_in),
    .out_vec  (act_out),
    .lut_we   (ld_we && ld_target == LD_LUT && state == S_IDLE),
    .lut_waddr(ld_addr[LUT_AW-1:0]),
    .lut_wdata(ld_data[DATA_W-1:0])
  );

  // ---------------- buffer port muxing ----------------
  always_comb begin
    f_raddr[0] = FAW'(cnt);
    w_raddr[0] = WAW'(s1_e.col - w_base);
    w_raddr[1] = WAW'(fq_addr);
    o_raddr[0] = (state == S_COPY) ? OAW'(cnt) : OAW'(s1_e.row - o_base);
    o_raddr[1] = OAW'(or_addr);

    if (state == S_COPY) begin
      w_we    = c1_v;
      w_waddr = WAW'(c1_row);
      w_wdata = act_out;
    end else begin
      w_we    = ld_we && ld_target == LD_WBUF && state == S_IDLE;
      w_waddr = WAW'(ld_addr);
      w_wdata = ld_data;
    end

    o_we    = s2_v;
    o_waddr = s2_orow;
    o_wdata = eng_out;
  end

  // ---------------- side-port read data ----------------
  logic or_valid_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) or_valid_q <= 1'b0;
    else if (or_rd) or_valid_q <= or_hit && o_valid[OAW'(or_addr)];
  end
  assign or_data = or_valid_q ? o_rdata[1] : '0;
  assign fq_data = w_rdata[1];

  // ---------------- control ----------------
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      nnz_q     <= '0;
      s1_v      <= 1'b0;
      s2_v      <= 1'b0;
      s2_orow   <= '0;
      s2_ovalid <= 1'b0;
      s2_val    <= '0;
      wr_v      <= 1'b0;
      wr_row    <= '0;
      wr_data   <= '0;
      c1_v      <= 1'b0;
      c1_row    <= '0;
      c1_valid  <= 1'b0;
      o_valid   <= '0;
      done      <= 1'b0;
      dropped   <= '0;
      idx_copy  <= 1'b0;
    end else begin
      done     <= 1'b0;
      idx_copy <= 1'b0;
      // write-back stage bookkeeping (SPMM)
      wr_v <= s2_v;
      if (s2_v) begin
        wr_row            <= s2_orow;
        wr_data           <= eng_out;
        o_valid[s2_orow]  <= 1'b1;
      end
      unique case (state)
        S_IDLE: begin
          if (cmd_valid) begin
            cnt   <= '0;
            nnz_q <= nnz;
            unique case (cmd)
              CHUNK_SPMM: begin state <= S_SPMM; dropped <= '0; end
              CHUNK_COPY: state <= S_COPY;
              default: begin o_valid <= '0; done <= 1'b1; end
            endcase
          end
        end
        S_SPMM: begin
          // stage 0: issue FBuf read
          s1_v <= (cnt < nnz_q);
          if (cnt < nnz_q) cnt <= cnt + 1'b1;
          // stage 1: issue WBuf/OBuf reads
          s2_v      <= s1_v && s1_whit && s1_ohit;
          s2_orow   <= OAW'(s1_e.row - o_base);
          s2_val    <= s1_e.val;
          s2_ovalid <= o_valid[OAW'(s1_e.row - o_base)];
          if (s1_v && !(s1_whit && s1_ohit)) dropped <= dropped + 1'b1;
          // finish when every stage is empty
          if (cnt >= nnz_q && !s1_v && !s2_v) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_COPY: begin
          c1_v     <= (cnt < o_count);
          c1_row   <= OAW'(cnt);
          c1_valid <= (cnt < o_count) && o_valid[OAW'(cnt)];
          if (cnt < o_count) cnt <= cnt + 1'b1;
          if (cnt >= o_count && !c1_v) begin
            state    <= S_IDLE;
            o_valid  <= '0;
            idx_copy <= 1'b1;
            done     <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
