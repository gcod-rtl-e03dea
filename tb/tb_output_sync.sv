// tb_output_sync: self-checking test of the output synchronization (4 lanes).
// Both read sides are modelled with one-cycle latency: dense row r holds
// lane i = 100*r + i, sparse row r holds lane i = 3*r - 7*i. The activation
// input is returned through a ReLU written in the testbench. Checks every
// output row's index and data, the row order and the done pulse.
module tb_output_sync;
  import gcod_pkg::*;
  localparam int L = 4, RW = L * 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, rd_en, out_valid;
  idx_t first_row, n_rows, rd_row, out_row;
  logic [RW-1:0] dense_data, sparse_data, out_data;
  data_t [L-1:0] sum_vec, act_vec;

  always #5 clk = ~clk;

  output_sync #(.LANES(L)) dut (.clk, .rst_n, .start, .first_row, .n_rows, .busy, .done,
    .rd_en, .rd_row, .dense_data, .sparse_data, .sum_vec, .act_vec, .out_valid, .out_row, .out_data);

  always_comb for (int i = 0; i < L; i++) act_vec[i] = (sum_vec[i] < 0) ? 0 : sum_vec[i];

  always_ff @(posedge clk)
    if (rd_en)
      for (int i = 0; i < L; i++) begin
        dense_data[i*32 +: 32]  <= 32'(100 * int'(rd_row) + i);
        sparse_data[i*32 +: 32] <= 32'(3 * int'(rd_row) - 7 * i * 40);
      end

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
    int f, n, next, e, ndone;
    start = 0; first_row = 0; n_rows = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      f = $urandom % 50; n = (t == 3) ? 0 : 1 + $urandom % 20;
      @(negedge clk);
      start = 1; first_row = idx_t'(f); n_rows = idx_t'(n);
      @(negedge clk);
      start = 0;
      next = f; ndone = 0;
      for (int c = 0; c < n + 10; c++) begin
        if (out_valid) begin
          chk(out_row == idx_t'(next), $sformatf("row order t=%0d", t));
          for (int i = 0; i < L; i++) begin
            e = 100 * next + i + 3 * next - 7 * i * 40;
            if (e < 0) e = 0;
            chk(out_data[i*32 +: 32] == 32'(e), $sformatf("data row %0d lane %0d", next, i));
          end
          next++;
        end
        if (done) begin
          ndone++;
          chk(next == f + n, $sformatf("done after last row t=%0d", t));
        end
        @(negedge clk);
      end
      chk(ndone == 1, "one done pulse");
      chk(next == f + n, $sformatf("row count t=%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
