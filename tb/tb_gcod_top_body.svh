// Body shared by the end-to-end testbenches of gcod_top. The including module
// declares the localparams L (lanes), NC (chunks), WD (weight/output rows per
// chunk), NN (nodes), FIN (input features) and instantiates the top as `dut`
// with the signals declared here.
//
// The test runs one GCN layer, out = ReLU(A * (X * W)), end to end:
//   1. every chunk gets W (FIN rows) as weights and the COO non-zeros of X
//      for its nodes; OP_COMBINE computes X*W rows in the chunks' OBufs;
//   2. OP_FORWARD copies them into the chunks' WBufs (on-chip reuse);
//   3. every chunk gets its diagonal block of A in COO, the sparser branch the
//      off-diagonal part in CSC; OP_AGGREGATE runs both branches and the
//      output sync, and every output row is compared with the reference
//      computed here in 64-bit integers.
// The last chunk owns only WD-4 nodes, so columns of the 4 remaining nodes
// miss in the chunks and are read from a memory model (5-cycle latency)
// holding the reference X*W. Every fifth column is empty (skipped), one
// column has 6 non-zeros of equal row and value with a sample size of 4
// (its contribution is 4 * value * XW whatever rows are picked), and the COO
// lists contain runs of equal rows (bypass). Each mechanism is counted and a
// mechanism that never happened counts as a failure.

  localparam int RW = L * 32;
  localparam int UW = $clog2(NC + 1);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic ld_we, cmd_valid, busy, done, hbm_req, hbm_rvalid, out_valid;
  ld_target_e ld_target;
  logic [UW-1:0] ld_unit;
  idx_t ld_addr, col_lo, col_hi, n_sample, first_row, n_rows, hbm_row, out_row;
  logic [RW-1:0] ld_data, hbm_rdata, out_data;
  op_e cmd_op;
  idx_t [NC-1:0] chunk_nnz;
  act_mode_e chunk_act, out_act;
  logic [2:0] ctrl_state;
  logic [31:0] op_cycles, fwd_hits, fwd_misses, hbm_reads, cols_skipped, cols_sampled, dropped;

  always #5 clk = ~clk;

  longint W  [FIN][L];
  longint XW [NN][L];
  longint RES[NN][L];
  int     owner_cnt [NC];

  initial begin
    #(64'd2_000_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  function automatic longint wrap(longint x);
    return longint'(data_t'(x));
  endfunction

  function automatic longint mulq(longint a, longint b);
    return (longint'(data_t'(a)) * longint'(data_t'(b))) >>> 16;
  endfunction

  // memory model: X*W row reads with 5 cycles of latency
  int   hbm_wait;
  idx_t hbm_q;
  always_ff @(posedge clk) begin
    hbm_rvalid <= 1'b0;
    if (hbm_req) begin hbm_wait <= 5; hbm_q <= hbm_row; end
    else if (hbm_wait > 1) hbm_wait <= hbm_wait - 1;
    else if (hbm_wait == 1) begin
      hbm_wait   <= 0;
      hbm_rvalid <= 1'b1;
      for (int i = 0; i < L; i++) hbm_rdata[i*32 +: 32] <= 32'(XW[hbm_q][i]);
    end
  end

  task automatic load(int unit, ld_target_e tg, int a, logic [RW-1:0] d);
    ld_we = 1; ld_unit = UW'(unit); ld_target = tg; ld_addr = idx_t'(a); ld_data = d;
    @(negedge clk);
    ld_we = 0;
  endtask

  task automatic run_op(op_e o, output int cyc);
    cmd_valid = 1; cmd_op = o;
    @(negedge clk);
    cmd_valid = 0; cyc = 1;
    while (!done && cyc < 2_000_000) begin @(negedge clk); cyc++; end
    chk(done, $sformatf("operation %0d finished", o));
  endtask

  function automatic int chunk_of(int r);
    for (int k = 0; k < NC; k++)
      if (r >= k * WD && r < k * WD + owner_cnt[k]) return k;
    return -1;
  endfunction

  int n_bypass_pairs, n_relu_clamped, n_rows_out, n_combine, n_forward, n_aggregate;

  initial begin
    int cyc, nz, prev_r, r, c, k, cnt, ent, sc, r0;
    longint v, v0;
    logic [RW-1:0] d;
    coo_t e;
    csc_t s;
    n_bypass_pairs = 0; n_relu_clamped = 0; n_rows_out = 0;
    n_combine = 0; n_forward = 0; n_aggregate = 0;
    hbm_wait = 0;
    ld_we = 0; cmd_valid = 0; cmd_op = OP_COMBINE; ld_unit = '0; ld_target = LD_FBUF;
    ld_addr = '0; ld_data = '0; chunk_act = ACT_NONE; out_act = ACT_RELU;
    col_lo = 0; col_hi = idx_t'(NN); n_sample = 4; first_row = 0; n_rows = idx_t'(NN);
    for (int kk = 0; kk < NC; kk++) begin
      owner_cnt[kk] = (kk == NC - 1) ? WD - 4 : WD;
      chunk_nnz[kk] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---------------- 1. combination: X * W in the chunks ----------------
    for (int f = 0; f < FIN; f++)
      for (int i = 0; i < L; i++) W[f][i] = longint'(int'($urandom % 4096) - 2048) <<< 6;
    for (int n = 0; n < NN; n++) for (int i = 0; i < L; i++) XW[n][i] = 0;
    for (k = 0; k < NC; k++) begin
      load(k, LD_IDX, 0, RW'({16'(owner_cnt[k]), 16'(k * WD), 16'(FIN), 16'(0)}));
      for (int f = 0; f < FIN; f++) begin
        for (int i = 0; i < L; i++) d[i*32 +: 32] = 32'(W[f][i]);
        load(k, LD_WBUF, f, d);
      end
      nz = 0;
      for (r = k * WD; r < k * WD + owner_cnt[k]; r++) begin
        for (int j = 0; j < 3; j++) begin
          c = $urandom % FIN;
          v = longint'(int'($urandom % 131072) - 65536);
          for (int i = 0; i < L; i++) XW[r][i] = wrap(XW[r][i] + mulq(v, W[c][i]));
          e.row = idx_t'(r); e.col = idx_t'(c); e.val = data_t'(v);
          load(k, LD_FBUF, nz, RW'(e));
          nz++;
        end
      end
      chunk_nnz[k] = idx_t'(nz);
    end
    // X*W rows of the unowned nodes live only off chip
    for (r = NN - 4; r < NN; r++)
      for (int i = 0; i < L; i++) XW[r][i] = longint'(int'($urandom % 8192) - 4096) <<< 8;
    run_op(OP_COMBINE, cyc);
    n_combine++;
    $display("combination: %0d cycles", op_cycles);

    // ---------------- 2. keep X*W on chip as the chunks' weights ----------------
    run_op(OP_FORWARD, cyc);
    n_forward++;

    // ---------------- 3. aggregation over both branches ----------------
    for (int n = 0; n < NN; n++) for (int i = 0; i < L; i++) RES[n][i] = 0;
    // diagonal blocks, COO, rows in order with runs
    for (k = 0; k < NC; k++) begin
      nz = 0; prev_r = -1;
      for (r = k * WD; r < k * WD + owner_cnt[k]; r++) begin
        for (int j = 0; j < 2; j++) begin
          c = k * WD + $urandom % owner_cnt[k];
          v = $urandom % 65536;
          for (int i = 0; i < L; i++) RES[r][i] = wrap(RES[r][i] + mulq(v, XW[c][i]));
          if (r == prev_r) n_bypass_pairs++;
          prev_r = r;
          e.row = idx_t'(r); e.col = idx_t'(c); e.val = data_t'(v);
          load(k, LD_FBUF, nz, RW'(e));
          nz++;
        end
      end
      chunk_nnz[k] = idx_t'(nz);
    end
    // off-diagonal part, CSC, in the sparser branch
    sc = 1; r0 = 2; v0 = 40000;
    ent = 0;
    for (c = 0; c < NN; c++) begin
      load(NC, LD_CPTR, c, RW'(ent));
      if (c % 5 == 0) continue;
      cnt = (c == sc) ? 6 : 1 + $urandom % 2;
      for (int j = 0; j < cnt; j++) begin
        if (c == sc) begin r = r0; v = v0; end
        else begin r = $urandom % NN; v = $urandom % 65536; end
        if (c != sc || j < 4)
          for (int i = 0; i < L; i++) RES[r][i] = wrap(RES[r][i] + mulq(v, XW[c][i]));
        s.row = idx_t'(r); s.val = data_t'(v);
        load(NC, LD_CENT, ent, RW'(s));
        ent++;
      end
    end
    load(NC, LD_CPTR, NN, RW'(ent));

    fork
      run_op(OP_AGGREGATE, cyc);
      begin
        int expect_row;
        expect_row = 0;
        while (!done) begin
          @(posedge clk); #1;
          if (out_valid) begin
            chk(out_row == idx_t'(expect_row), $sformatf("output row order %0d", expect_row));
            for (int i = 0; i < L; i++) begin
              longint ex;
              ex = RES[out_row][i];
              if (ex < 0) begin ex = 0; n_relu_clamped++; end
              chk(out_data[i*32 +: 32] == 32'(ex),
                  $sformatf("row %0d lane %0d got %0d exp %0d", out_row, i, $signed(out_data[i*32 +: 32]), ex));
            end
            expect_row++;
            n_rows_out++;
          end
        end
      end
    join
    n_aggregate++;
    $display("aggregation: %0d cycles, forwarding hits %0d misses %0d, off-chip reads %0d, skipped columns %0d, sampled columns %0d, dropped %0d",
             op_cycles, fwd_hits, fwd_misses, hbm_reads, cols_skipped, cols_sampled, dropped);

    // ---------------- mechanisms that must have happened ----------------
    chk(n_rows_out == NN, $sformatf("all %0d rows out (%0d)", NN, n_rows_out));
    chk(n_combine > 0 && n_forward > 0 && n_aggregate > 0, "combination, forward, aggregation ran");
    chk(fwd_hits > 0, "weight forwarding hit");
    begin
      int exp_miss;
      exp_miss = 0;
      for (int cc = NN - 4; cc < NN; cc++) if (cc % 5 != 0) exp_miss++;
      chk(fwd_misses == 32'(exp_miss), $sformatf("forwarding misses %0d, expected %0d", fwd_misses, exp_miss));
    end
    chk(hbm_reads == fwd_misses, "every miss read off chip");
    chk(cols_skipped == 32'((NN + 4) / 5), $sformatf("empty columns skipped %0d", cols_skipped));
    chk(cols_sampled == 1, "one column sub-sampled");
    chk(dropped == 0, "no dropped entries");
    chk(n_bypass_pairs > 0, "write bypass exercised");
    chk(n_relu_clamped > 0, "ReLU clamped negative values");
    $display("mechanisms: combine=%0d forward=%0d aggregate=%0d fwd_hits=%0d fwd_misses=%0d skipped=%0d sampled=%0d bypass_pairs=%0d relu_clamped=%0d",
             n_combine, n_forward, n_aggregate, fwd_hits, fwd_misses, cols_skipped, cols_sampled, n_bypass_pairs, n_relu_clamped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
