// activation_unit: element-wise non-linear activation of a result row.
//
// ReLU is a gate per lane: a negative value is forced to zero. Any other
// activation goes through a lookup table shared by all lanes, which the host
// fills through the write port (for instance with a sigmoid or tanh). The
// table has 2**LUT_AW entries spread evenly over the input range
// [-LUT_RANGE/2, +LUT_RANGE/2) (Q16.16); inputs outside are clamped to the
// first or last entry and the entry value is returned as is (piecewise
// constant). ReLU gating and table estimation are the paper's; the table size,
// range and piecewise-constant lookup are this design's choices.
// Combinational from in_vec/mode to out_vec; table writes take effect on the
// next clock edge. The table is not reset; it must be written before use.
module activation_unit
  import gcod_pkg::*;
#(
  parameter int LANES     = 1024,
  parameter int LUT_AW    = 8,
  parameter int LUT_RANGE = 16     // input span covered by the table, integer units
) (
  input  logic                   clk,
  input  act_mode_e              mode,
  input  data_t [LANES-1:0]      in_vec,
  output data_t [LANES-1:0]      out_vec,
  input  logic                   lut_we,
  input  logic [LUT_AW-1:0]      lut_waddr,
  input  data_t                  lut_wdata
);
  localparam int LUT_N = 1 << LUT_AW;
  // log2 of the input step per table entry, in Q16.16 LSBs.
  localparam int STEP_SH = FRAC_W + $clog2(LUT_RANGE) - LUT_AW;
  localparam logic signed [DATA_W:0] HALF = (DATA_W+1)'(LUT_RANGE / 2) <<< FRAC_W;

  data_t lut [LUT_N];

  always_ff @(posedge clk)
    if (lut_we) lut[lut_waddr] <= lut_wdata;

  function automatic logic [LUT_AW-1:0] lut_index(data_t x);
    logic signed [DATA_W:0] shifted;
    logic signed [DATA_W:0] idx;
    shifted = (DATA_W+1)'(x) + HALF;
    idx     = shifted >>> STEP_SH;
    if (idx < 0)          return '0;
    else if (idx >= (DATA_W+1)'(LUT_N)) return '1;
    else                  return idx[LUT_AW-1:0];
  endfunction

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      unique case (mode)
        ACT_RELU: out_vec[i] = in_vec[i][DATA_W-1] ? data_t'(0) : in_vec[i];
        ACT_LUT:  out_vec[i] = lut[lut_index(in_vec[i])];
        default:  out_vec[i] = in_vec[i];
      endcase
    end
  end
endmodule
