// tb_sparse_subacc: self-checking test of the sparser-branch sub-accelerator
// (4 lanes, 16 nodes). The weight query bus, the off-chip memory and the
// denser-branch readout are modelled here: rows 0..7 of X*W are "on chip"
// (query hit, one-cycle answer), rows 8..15 miss and come from the memory
// model after 4 cycles; the denser branch answers row r with lane i =
// 50*r - i*1000. A random CSC matrix with empty columns is aggregated and
// synchronized, and every output row is compared with dense + A*XW computed
// here; then the run is repeated with a sample size of 2 and a column of 5
// equal non-zeros, which must contribute exactly 2 of them. Checks the
// skip, miss, sample counters and the done pulses.
module tb_sparse_subacc;
  import gcod_pkg::*;
  localparam int L = 4, RW = L * 32, N = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic ld_we, agg_start, agg_busy, agg_done, sync_start, sync_busy, sync_done;
  logic q_valid, resp_valid, resp_hit, hbm_req, hbm_rvalid, ds_rd, out_valid;
  ld_target_e ld_target;
  idx_t ld_addr, col_lo, col_hi, n_sample, first_row, n_rows, q_row, hbm_row, ds_row, out_row;
  logic [RW-1:0] ld_data, resp_data, hbm_rdata, ds_data, out_data;
  act_mode_e act_mode;
  logic [31:0] n_cols_done, n_cols_skipped, n_hbm_reads, n_sampled_cols, n_dropped;

  always #5 clk = ~clk;

  sparse_subacc #(.LANES(L), .N_NODES(N), .EDEPTH(64)) dut (.*);

  longint XW [N][L];
  longint RES[N][L];

  function automatic logic [RW-1:0] xwrow(int r);
    logic [RW-1:0] d;
    for (int i = 0; i < L; i++) d[i*32 +: 32] = 32'(XW[r][i]);
    return d;
  endfunction

  // models
  int hw; idx_t hq;
  always_ff @(posedge clk) begin
    resp_valid <= q_valid;
    resp_hit   <= q_valid && (q_row < 8);
    resp_data  <= (q_row < 8) ? xwrow(int'(q_row) % N) : {RW{1'b1}};  // a miss carries no row
    hbm_rvalid <= 1'b0;
    if (hbm_req) begin hw <= 4; hq <= hbm_row; end
    else if (hw > 1) hw <= hw - 1;
    else if (hw == 1) begin hw <= 0; hbm_rvalid <= 1'b1; hbm_rdata <= xwrow(int'(hq)); end
    if (ds_rd) for (int i = 0; i < L; i++) ds_data[i*32 +: 32] <= 32'(50 * int'(ds_row) - i * 1000);
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  task automatic load(ld_target_e tg, int a, logic [RW-1:0] d);
    ld_we = 1; ld_target = tg; ld_addr = idx_t'(a); ld_data = d;
    @(negedge clk);
    ld_we = 0;
  endtask

  function automatic longint mulq(longint a, longint b);
    return (longint'(data_t'(a)) * longint'(data_t'(b))) >>> 16;
  endfunction

  task automatic run_and_check(int ns, int exp_skip, int exp_miss, int exp_sampled);
    int cyc, row;
    @(negedge clk);
    agg_start = 1; n_sample = idx_t'(ns);
    @(negedge clk);
    agg_start = 0; cyc = 0;
    while (!agg_done && cyc < 5000) begin @(negedge clk); cyc++; end
    chk(agg_done, "aggregation done");
    chk(n_cols_done == N, "all columns walked");
    chk(n_cols_skipped == 32'(exp_skip), $sformatf("skipped %0d exp %0d", n_cols_skipped, exp_skip));
    chk(n_hbm_reads == 32'(exp_miss), $sformatf("off-chip reads %0d exp %0d", n_hbm_reads, exp_miss));
    chk(n_sampled_cols == 32'(exp_sampled), "sampled columns");
    @(negedge clk);
    sync_start = 1;
    @(negedge clk);
    sync_start = 0; row = 0; cyc = 0;
    while (cyc < 100) begin
      if (out_valid) begin
        chk(out_row == idx_t'(row), "row order");
        for (int i = 0; i < L; i++)
          chk(out_data[i*32 +: 32] == 32'(RES[row][i] + 50 * row - i * 1000),
              $sformatf("row %0d lane %0d got %0d exp %0d", row, i, $signed(out_data[i*32 +: 32]), RES[row][i] + 50 * row - i * 1000));
        row++;
      end
      if (sync_done) break;
      @(negedge clk); cyc++;
    end
    chk(sync_done && row == N, $sformatf("sync done with %0d rows", row));
  endtask

  initial begin
    int ent, cnt, r, skip, miss;
    longint v;
    csc_t s;
    ld_we = 0; agg_start = 0; sync_start = 0; ld_target = LD_CPTR; ld_addr = 0; ld_data = '0;
    col_lo = 0; col_hi = idx_t'(N); n_sample = 0; first_row = 0; n_rows = idx_t'(N); act_mode = ACT_NONE;
    hw = 0;
    for (int c = 0; c < N; c++) for (int i = 0; i < L; i++) XW[c][i] = longint'(int'($urandom % 8192) - 4096) <<< 8;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int n = 0; n < N; n++) for (int i = 0; i < L; i++) RES[n][i] = 0;
      ent = 0; skip = 0; miss = 0;
      for (int c = 0; c < N; c++) begin
        load(LD_CPTR, c, RW'(ent));
        cnt = (c % 4 == 1) ? 0 : 1 + $urandom % 2;
        if (pass == 1 && c == 2) cnt = 5;
        if (cnt == 0) skip++;
        else if (c >= 8) miss++;
        for (int j = 0; j < cnt; j++) begin
          r = (j == 1 && c % 3 == 0) ? int'(s.row) : $urandom % N;   // some equal rows back to back
          v = $urandom % 65536;
          if (pass == 1 && c == 2) begin r = 7; v = 30000; end
          if (!(pass == 1 && c == 2 && j >= 2))
            for (int i = 0; i < L; i++) RES[r][i] = longint'(data_t'(RES[r][i] + mulq(v, XW[c][i])));
          s.row = idx_t'(r); s.val = data_t'(v);
          load(LD_CENT, ent, RW'(s));
          ent++;
        end
      end
      load(LD_CPTR, N, RW'(ent));
      run_and_check(pass == 1 ? 2 : 0, skip, miss, pass);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
