// tb_spmm_engine: self-checking test of the SpMM engine with 8 lanes.
// Checks the broadcast element-wise mode (one sparse value times a weight
// row, plus partial sums or Const. 0), the per-lane element-wise mode and the
// inner-product mode against sums computed in the testbench.
module tb_spmm_engine;
  import gcod_pkg::*;
  localparam int L = 8;
  int checks = 0, failures = 0;
  spmm_mode_e mode;
  logic bcast, acc_en;
  data_t [L-1:0] in_vec, w_vec, acc_vec, out_vec;
  data_t out_sum;

  spmm_engine #(.LANES(L)) dut (.mode, .bcast, .in_vec, .w_vec, .acc_vec, .acc_en, .out_vec, .out_sum);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint mulq(data_t x, data_t y);
    return (longint'(x) * longint'(y)) >>> 16;
  endfunction

  initial begin
    longint s;
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < L; i++) begin
        in_vec[i]  = data_t'(int'($urandom % 4096) - 2048) <<< 8;
        w_vec[i]   = data_t'(int'($urandom % 4096) - 2048) <<< 8;
        acc_vec[i] = data_t'($urandom % 100000);
      end
      mode   = (t % 3 == 2) ? SPMM_INNER : SPMM_ELEMWISE;
      bcast  = (t % 3 == 0);
      acc_en = (t % 2 == 0);
      #1;
      if (mode == SPMM_ELEMWISE) begin
        for (int i = 0; i < L; i++) begin
          s = mulq(bcast ? in_vec[0] : in_vec[i], w_vec[i]) + (acc_en ? longint'(acc_vec[i]) : 0);
          checks++;
          if (out_vec[i] !== data_t'(s)) begin
            failures++;
            $display("EW mismatch t=%0d lane=%0d got=%0d exp=%0d", t, i, out_vec[i], data_t'(s));
          end
        end
      end else begin
        s = acc_en ? longint'(acc_vec[0]) : 0;
        for (int i = 0; i < L; i++) s += mulq(in_vec[i], w_vec[i]);
        checks++;
        if (out_sum !== data_t'(s)) begin
          failures++;
          $display("IP mismatch t=%0d got=%0d exp=%0d", t, out_sum, data_t'(s));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
