// tb_gcod_controller: self-checking test of the top-level sequencer with 3
// chunks. The chunks and the sparser branch are modelled: each answers a
// command with done after a random delay. Checks that every operation issues
// the right chunk command, that aggregation starts the sparser branch at the
// same time, that output sync starts only after both branches are done, and
// that done and the cycle count are reported.
module tb_gcod_controller;
  import gcod_pkg::*;
  localparam int NC = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, busy, done, ck_cmd_valid, sp_agg_start, sp_agg_done, sp_sync_start, sp_sync_done;
  op_e op;
  chunk_cmd_e ck_cmd;
  logic [NC-1:0] ck_done;
  logic [2:0] state;
  logic [31:0] cycles;

  always #5 clk = ~clk;

  gcod_controller #(.NUM_CHUNKS(NC)) dut (.clk, .rst_n, .cmd_valid, .op, .busy, .done,
    .ck_cmd_valid, .ck_cmd, .ck_done, .sp_agg_start, .sp_agg_done, .sp_sync_start, .sp_sync_done,
    .state, .cycles);

  // branch models: done after a programmable delay
  int ck_delay [NC];
  int sp_delay, sync_delay;
  int ck_left [NC];
  int sp_left, sync_left;
  int t_ck_last, t_sp_last, t_sync_start, now;
  always_ff @(posedge clk) now <= now + 1;
  always_ff @(posedge clk) begin
    ck_done <= '0; sp_agg_done <= 0; sp_sync_done <= 0;
    for (int k = 0; k < NC; k++) begin
      if (ck_cmd_valid) ck_left[k] <= ck_delay[k];
      else if (ck_left[k] == 1) begin ck_done[k] <= 1; ck_left[k] <= 0; t_ck_last <= now; end
      else if (ck_left[k] > 1) ck_left[k] <= ck_left[k] - 1;
    end
    if (sp_agg_start) sp_left <= sp_delay;
    else if (sp_left == 1) begin sp_agg_done <= 1; sp_left <= 0; t_sp_last <= now; end
    else if (sp_left > 1) sp_left <= sp_left - 1;
    if (sp_sync_start) begin sync_left <= sync_delay; t_sync_start <= now; end
    else if (sync_left == 1) begin sp_sync_done <= 1; sync_left <= 0; end
    else if (sync_left > 1) sync_left <= sync_left - 1;
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
    int n_ck, n_sp, n_sync, cyc;
    chunk_cmd_e seen;
    now = 0; cmd_valid = 0; op = OP_COMBINE;
    for (int k = 0; k < NC; k++) ck_left[k] = 0;
    sp_left = 0; sync_left = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      for (int k = 0; k < NC; k++) ck_delay[k] = 1 + $urandom % 20;
      sp_delay = 1 + $urandom % 30; sync_delay = 1 + $urandom % 10;
      @(negedge clk);
      cmd_valid = 1; op = op_e'(t % 4);
      @(negedge clk);
      cmd_valid = 0;
      n_ck = 0; n_sp = 0; n_sync = 0; cyc = 0;
      chk(busy, "busy after command");
      while (!done && cyc < 200) begin
        if (ck_cmd_valid) begin n_ck++; seen = ck_cmd; end
        if (sp_agg_start) n_sp++;
        if (sp_sync_start) begin
          n_sync++;
          chk(ck_left[0] == 0 && ck_left[1] == 0 && ck_left[2] == 0 && sp_left == 0, "sync after both branches");
        end
        @(negedge clk); cyc++;
      end
      chk(done, $sformatf("done t=%0d", t));
      chk(n_ck == 1, "one chunk command");
      case (op_e'(t % 4))
        OP_COMBINE:   chk(seen == CHUNK_SPMM && n_sp == 0 && n_sync == 0, "combine");
        OP_FORWARD:   chk(seen == CHUNK_COPY && n_sp == 0 && n_sync == 0, "forward");
        OP_CLEAR:     chk(seen == CHUNK_CLR && n_sp == 0 && n_sync == 0, "clear");
        default:      chk(seen == CHUNK_SPMM && n_sp == 1 && n_sync == 1, "aggregate");
      endcase
      @(negedge clk);
      chk(!busy && cycles > 0 && cycles <= 32'(cyc + 2), $sformatf("cycles=%0d cyc=%0d", cycles, cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
