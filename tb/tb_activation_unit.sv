// tb_activation_unit: self-checking test of the activation unit (4 lanes).
// ReLU and bypass are checked on random values; for the table mode the table
// is filled with entry i = 1000*i + 7 and the expected entry for x is
// clamp(floor((x + 8.0) * 16), 0, 255), i.e. 1/16 steps over [-8, 8).
module tb_activation_unit;
  import gcod_pkg::*;
  localparam int L = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  act_mode_e mode;
  data_t [L-1:0] in_vec, out_vec;
  logic lut_we;
  logic [7:0] lut_waddr;
  data_t lut_wdata;

  always #5 clk = ~clk;

  activation_unit #(.LANES(L)) dut (.clk, .mode, .in_vec, .out_vec, .lut_we, .lut_waddr, .lut_wdata);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint idx;
    data_t e;
    lut_we = 0; mode = ACT_NONE; in_vec = '0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = 8'(i); lut_wdata = 1000 * i + 7;
    end
    @(negedge clk); lut_we = 0;
    for (int t = 0; t < 600; t++) begin
      mode = act_mode_e'(t % 3);
      for (int i = 0; i < L; i++)
        in_vec[i] = (t % 2) ? data_t'($urandom) : data_t'(int'($urandom % (24 << 16)) - (12 << 16));
      #1;
      for (int i = 0; i < L; i++) begin
        case (mode)
          ACT_RELU: e = (in_vec[i] < 0) ? 0 : in_vec[i];
          ACT_LUT: begin
            idx = (longint'(in_vec[i]) + (8 << 16)) >>> 12;
            if (idx < 0) idx = 0;
            if (idx > 255) idx = 255;
            e = data_t'(1000 * idx + 7);
          end
          default: e = in_vec[i];
        endcase
        checks++;
        if (out_vec[i] !== e) begin
          failures++;
          if (failures < 10) $display("mismatch mode=%0d x=%0d got=%0d exp=%0d", mode, in_vec[i], out_vec[i], e);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
