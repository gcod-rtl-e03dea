// tb_weight_forwarding: self-checking test of query-based weight forwarding
// with 3 chunks of 4 lanes. The chunk side is modelled in the testbench: chunk
// k holds rows [10k+2, 10k+8) (chunks 1 and 2 overlap at nothing; chunk 0 and a
// duplicated range test the priority) and returns row data derived from
// (k, row) one cycle after its read strobe. Checks hit/miss, the data, the
// selected chunk and the hit/miss counters.
module tb_weight_forwarding;
  import gcod_pkg::*;
  localparam int NC = 3, L = 4, RW = L * 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic q_valid, resp_valid, resp_hit;
  idx_t q_row, fq_row;
  logic [RW-1:0] resp_data;
  logic [NC-1:0] fq_hit, fq_rd;
  logic [NC-1:0][RW-1:0] fq_data;
  logic [31:0] n_hits, n_misses;
  int lo [NC], hi [NC];

  always #5 clk = ~clk;

  weight_forwarding #(.NUM_CHUNKS(NC), .LANES(L)) dut (.clk, .rst_n, .q_valid, .q_row,
    .resp_valid, .resp_hit, .resp_data, .fq_row, .fq_hit, .fq_rd, .fq_data, .n_hits, .n_misses);

  function automatic logic [RW-1:0] rowdata(int k, int r);
    return {32'(k * 1000 + r), 32'(r), 32'(k), 32'hC0DE};
  endfunction

  // chunk model: combinational hit, registered read data
  always_comb for (int k = 0; k < NC; k++) fq_hit[k] = (fq_row >= idx_t'(lo[k])) && (fq_row < idx_t'(hi[k]));
  always_ff @(posedge clk) for (int k = 0; k < NC; k++) if (fq_rd[k]) fq_data[k] <= rowdata(k, int'(fq_row));

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
    int r, exp_k, nh, nm;
    lo[0] = 2;  hi[0] = 8;
    lo[1] = 12; hi[1] = 18;
    lo[2] = 5;  hi[2] = 28;   // overlaps chunk 0 at 5..7: chunk 0 wins
    q_valid = 0; q_row = 0; nh = 0; nm = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      r = $urandom % 32;
      exp_k = -1;
      for (int k = NC - 1; k >= 0; k--) if (r >= lo[k] && r < hi[k]) exp_k = k;
      @(negedge clk);
      q_valid = 1; q_row = idx_t'(r);
      #1;
      if (exp_k >= 0) chk(fq_rd == NC'(1 << exp_k), $sformatf("read strobe r=%0d", r));
      else chk(fq_rd == '0, "no strobe on miss");
      @(negedge clk);
      q_valid = 0;
      chk(resp_valid, "resp_valid");
      chk(resp_hit == (exp_k >= 0), $sformatf("resp_hit r=%0d", r));
      if (exp_k >= 0) begin
        chk(resp_data == rowdata(exp_k, r), $sformatf("resp_data r=%0d", r));
        nh++;
      end else nm++;
    end
    @(negedge clk);
    chk(n_hits == 32'(nh) && n_misses == 32'(nm), "counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
