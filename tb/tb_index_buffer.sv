// tb_index_buffer: self-checking test of the index buffer. Loads ranges,
// checks hit/miss and computed addresses of weight-row and output-row
// queries at and around the range bounds, then the copy of the output range
// into the weight range.
module tb_index_buffer;
  import gcod_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic we, copy;
  idx_t wbi, wci, obi, oci, w_base, w_count, o_base, o_count;
  idx_t q_row, q_addr, o_row, o_addr;
  logic q_hit, o_hit;

  always #5 clk = ~clk;

  index_buffer dut (.clk, .rst_n, .we, .w_base_in(wbi), .w_count_in(wci), .o_base_in(obi),
    .o_count_in(oci), .copy, .w_base, .w_count, .o_base, .o_count,
    .q_row, .q_hit, .q_addr, .o_row, .o_hit, .o_addr);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int wb, wc, ob, oc;
    we = 0; copy = 0; q_row = 0; o_row = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      wb = $urandom % 1000; wc = 1 + $urandom % 300; ob = $urandom % 1000; oc = 1 + $urandom % 300;
      @(negedge clk);
      we = 1; wbi = idx_t'(wb); wci = idx_t'(wc); obi = idx_t'(ob); oci = idx_t'(oc);
      @(negedge clk);
      we = 0;
      for (int d = -2; d <= wc + 1; d++) begin
        if (wb + d < 0) continue;
        q_row = idx_t'(wb + d);
        o_row = idx_t'(ob + d);
        #1;
        chk(q_hit == (d >= 0 && d < wc), $sformatf("q_hit t=%0d d=%0d", t, d));
        if (d >= 0 && d < wc) chk(q_addr == idx_t'(d), "q_addr");
        if (ob + d >= 0) chk(o_hit == (d >= 0 && d < oc), $sformatf("o_hit t=%0d d=%0d", t, d));
        if (d >= 0 && d < oc) chk(o_addr == idx_t'(d), "o_addr");
      end
      if (t % 5 == 0) begin
        @(negedge clk); copy = 1;
        @(negedge clk); copy = 0;
        chk(w_base == idx_t'(ob) && w_count == idx_t'(oc), "copy");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
