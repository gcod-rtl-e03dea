// tb_dense_chunk: self-checking test of a denser-branch chunk (4 lanes, small
// buffers). It loads a weight range and an output range, a COO list with runs
// of equal rows (exercising the write bypass) and a few entries outside the
// ranges, runs CHUNK_SPMM and checks every output row through the readout
// port against sums computed here, the dropped count and the cycle count
// (nnz + 3). It then reads a weight row through the query port, runs
// CHUNK_COPY with ReLU, checks that the weight range moved to the output
// range, that the copied rows are ReLU(OBuf) and that OBuf is empty, runs a
// second SpMM on the copied rows, and finally checks CHUNK_CLR.
module tb_dense_chunk;
  import gcod_pkg::*;
  localparam int L = 4, RW = L * 32, WB = 100, WC = 10, OB = 200, OC = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic ld_we, cmd_valid, busy, done, fq_hit, fq_rd, or_hit, or_rd;
  ld_target_e ld_target;
  idx_t ld_addr, nnz, dropped, fq_row, or_row, w_base, w_count, o_base, o_count;
  logic [RW-1:0] ld_data, fq_data, or_data;
  chunk_cmd_e cmd;
  act_mode_e act_mode;

  always #5 clk = ~clk;

  dense_chunk #(.LANES(L), .FDEPTH(64), .WDEPTH(16), .ODEPTH(16)) dut (
    .clk, .rst_n, .ld_we, .ld_target, .ld_addr, .ld_data, .cmd_valid, .cmd, .nnz, .act_mode,
    .busy, .done, .dropped, .fq_row, .fq_hit, .fq_rd, .fq_data, .or_row, .or_hit, .or_rd, .or_data,
    .w_base, .w_count, .o_base, .o_count);

  longint W [WC][L];
  longint O [OC][L];
  bit     Ov [OC];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  task automatic load(ld_target_e tg, int a, logic [RW-1:0] d);
    @(negedge clk);
    ld_we = 1; ld_target = tg; ld_addr = idx_t'(a); ld_data = d;
    @(negedge clk);
    ld_we = 0;
  endtask

  task automatic run(chunk_cmd_e c, int n, output int cyc);
    @(negedge clk);
    cmd_valid = 1; cmd = c; nnz = idx_t'(n);
    @(negedge clk);
    cmd_valid = 0; cyc = 1;
    while (!done && cyc < 500) begin @(negedge clk); cyc++; end
  endtask

  function automatic data_t q(longint x);
    return data_t'(x);
  endfunction

  task automatic check_obuf(string tag);
    for (int r = OB - 3; r < OB + OC + 3; r++) begin
      @(negedge clk);
      or_row = idx_t'(r); or_rd = 1;
      #1;
      chk(or_hit == (r >= OB && r < OB + OC), $sformatf("%s or_hit %0d", tag, r));
      @(negedge clk);
      or_rd = 0;
      for (int i = 0; i < L; i++) begin
        longint e;
        e = (r >= OB && r < OB + OC && Ov[r-OB]) ? O[r-OB][i] : 0;
        chk(or_data[i*32 +: 32] == 32'(q(e)), $sformatf("%s row %0d lane %0d got %0d exp %0d", tag, r, i, $signed(or_data[i*32 +: 32]), q(e)));
      end
    end
  endtask

  initial begin
    int cyc, n, r, c, ndrop;
    data_t v;
    logic [RW-1:0] d;
    coo_t e;
    ld_we = 0; cmd_valid = 0; fq_rd = 0; or_rd = 0; fq_row = 0; or_row = 0; act_mode = ACT_NONE;
    ld_target = LD_FBUF; ld_addr = 0; ld_data = '0; cmd = CHUNK_SPMM; nnz = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    load(LD_IDX, 0, RW'({16'(OC), 16'(OB), 16'(WC), 16'(WB)}));
    for (int w = 0; w < WC; w++) begin
      for (int i = 0; i < L; i++) begin
        W[w][i] = longint'(int'($urandom % 65536) - 32768) * 4;
        d[i*32 +: 32] = 32'(W[w][i]);
      end
      load(LD_WBUF, w, d);
    end
    for (int o = 0; o < OC; o++) begin Ov[o] = 0; for (int i = 0; i < L; i++) O[o][i] = 0; end
    // COO list: runs of equal rows, plus out-of-range entries
    n = 0; ndrop = 0; r = OB;
    for (int k = 0; k < 40; k++) begin
      if ($urandom % 3 == 0) r = OB + $urandom % OC;
      c = WB + $urandom % WC;
      v = data_t'(int'($urandom % 131072) - 65536);
      if (k % 13 == 5) begin c = WB + WC + 3; ndrop++; end
      else if (k % 17 == 8) begin r = OB + OC + 1; ndrop++; end
      else begin
        for (int i = 0; i < L; i++)
          O[r-OB][i] = longint'(q(O[r-OB][i] + ((longint'(v) * W[c-WB][i]) >>> 16)));
        Ov[r-OB] = 1;
      end
      e.row = idx_t'(r); e.col = idx_t'(c); e.val = v;
      load(LD_FBUF, n, RW'(e));
      n++;
      if (r >= OB + OC) r = OB;
    end
    run(CHUNK_SPMM, n, cyc);
    chk(done, "spmm done");
    chk(cyc <= n + 4, $sformatf("spmm cycles %0d for %0d non-zeros", cyc, n));
    chk(dropped == idx_t'(ndrop), $sformatf("dropped %0d exp %0d", dropped, ndrop));
    check_obuf("spmm");
    // weight query port
    for (int w = 0; w < WC + 2; w++) begin
      @(negedge clk);
      fq_row = idx_t'(WB + w); fq_rd = 1;
      #1;
      chk(fq_hit == (w < WC), "fq_hit");
      @(negedge clk);
      fq_rd = 0;
      if (w < WC) for (int i = 0; i < L; i++) chk(fq_data[i*32 +: 32] == 32'(W[w][i]), "fq_data");
    end
    // copy with ReLU: OBuf rows become weights
    act_mode = ACT_RELU;
    run(CHUNK_COPY, 0, cyc);
    chk(done && cyc <= OC + 5, $sformatf("copy cycles %0d", cyc));
    @(negedge clk);
    chk(w_base == idx_t'(OB) && w_count == idx_t'(OC), "weight range follows output range");
    for (int o = 0; o < OC; o++) begin
      @(negedge clk);
      fq_row = idx_t'(OB + o); fq_rd = 1;
      @(negedge clk);
      fq_rd = 0;
      for (int i = 0; i < L; i++) begin
        longint ex;
        ex = Ov[o] ? O[o][i] : 0;
        if (ex < 0) ex = 0;
        chk(fq_data[i*32 +: 32] == 32'(ex), $sformatf("copied row %0d lane %0d", o, i));
        W[o % WC][i] = 0;
      end
    end
    for (int o = 0; o < OC; o++) Ov[o] = 0;
    check_obuf("after copy");
    // second SpMM over the copied rows (diagonal-block aggregation)
    begin
      longint XW [OC][L];
      for (int o = 0; o < OC; o++) for (int i = 0; i < L; i++) begin
        XW[o][i] = (O[o][i] < 0) ? 0 : O[o][i];
        O[o][i] = 0;
      end
      n = 0;
      for (int k = 0; k < 30; k++) begin
        r = OB + (k / 3) % OC; c = OB + $urandom % OC;
        v = data_t'(int'($urandom % 65536));
        for (int i = 0; i < L; i++)
          O[r-OB][i] = longint'(q(O[r-OB][i] + ((longint'(v) * XW[c-OB][i]) >>> 16)));
        Ov[r-OB] = 1;
        e.row = idx_t'(r); e.col = idx_t'(c); e.val = v;
        load(LD_FBUF, n, RW'(e));
        n++;
      end
    end
    run(CHUNK_SPMM, n, cyc);
    chk(dropped == 0, "no drops in second pass");
    check_obuf("aggregate");
    run(CHUNK_CLR, 0, cyc);
    for (int o = 0; o < OC; o++) Ov[o] = 0;
    check_obuf("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
