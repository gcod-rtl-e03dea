// tb_pe: self-checking test of one processing element.
// Random operands, both adder selections; the expected value is computed with
// 64-bit integer arithmetic: (a*w) shifted right by 16, plus the partial sum
// when selected, wrapped to 32 bits.
module tb_pe;
  import gcod_pkg::*;
  int checks = 0, failures = 0;
  data_t a, w, acc, out;
  pe_add_e sel;

  pe dut (.in_a(a), .in_w(w), .add_sel(sel), .acc_in(acc), .out(out));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint p, e;
    for (int i = 0; i < 2000; i++) begin
      a   = data_t'($urandom);
      w   = data_t'($urandom);
      acc = data_t'($urandom);
      if (i % 3 == 0) begin a = data_t'(($urandom % 200) - 100) <<< 16; w = data_t'(($urandom % 200) - 100) <<< 14; end
      sel = (i % 2) ? PE_ADD_ACC : PE_ADD_ZERO;
      #1;
      p = longint'(a) * longint'(w);
      e = (p >>> 16) + ((i % 2) ? longint'(acc) : 0);
      checks++;
      if (out !== data_t'(e)) begin
        failures++;
        if (failures < 10) $display("mismatch a=%0d w=%0d acc=%0d sel=%0d out=%0d exp=%0d", a, w, acc, sel, out, data_t'(e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
