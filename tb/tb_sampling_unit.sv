// tb_sampling_unit: self-checking test of the sampling unit.
// Columns no longer than the sample size (or with sampling off) must yield
// every entry address in order; longer columns must yield exactly n_sample
// addresses, all inside the column, not all equal; an empty column must
// finish without addresses. done and the address count are checked.
module tb_sampling_unit;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start, addr_valid, sampled, done, busy;
  logic [15:0] base, len, n_sample, addr;

  always #5 clk = ~clk;

  sampling_unit #(.AW(16)) dut (.clk, .rst_n, .start, .base, .len, .n_sample,
    .addr_valid, .addr_ready(1'b1), .addr, .sampled, .done, .busy);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int b, l, n, got, distinct_first, ndiff;
    bit saw_done;
    start = 0; base = 0; len = 0; n_sample = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      b = $urandom % 5000;
      l = (t % 7 == 0) ? 0 : 1 + $urandom % 40;
      n = (t % 4 == 0) ? 0 : 1 + $urandom % 12;
      @(negedge clk);
      start = 1; base = 16'(b); len = 16'(l); n_sample = 16'(n);
      @(negedge clk);
      start = 0;
      got = 0; saw_done = 0; ndiff = 0; distinct_first = -1;
      for (int c = 0; c < 100 && !saw_done; c++) begin
        if (done) saw_done = 1;
        if (addr_valid) begin
          if (n == 0 || l <= n) chk(addr == 16'(b + got), $sformatf("in-order addr t=%0d", t));
          else begin
            chk(addr >= 16'(b) && addr < 16'(b + l), $sformatf("sampled addr range t=%0d", t));
            if (distinct_first < 0) distinct_first = addr;
            else if (addr != 16'(distinct_first)) ndiff++;
          end
          got++;
        end
        @(negedge clk);
      end
      if (!saw_done && done) saw_done = 1;
      chk(saw_done, $sformatf("done t=%0d", t));
      chk(got == ((n == 0 || l <= n) ? l : n), $sformatf("count t=%0d got=%0d l=%0d n=%0d", t, got, l, n));
      if (n != 0 && l > n && n > 2) chk(ndiff > 0, "random picks vary");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
