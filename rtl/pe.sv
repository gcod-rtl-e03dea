// pe: one processing element of the SpMM engine (Fig. 6(b)).
//
// A PE multiplies its input by its weight and adds either Const. 0 or a
// partial sum, chosen by a mux in front of the adder:
//   out = in_a * in_w + (add_sel == PE_ADD_ACC ? acc_in : 0)
// The multiplier, the adder and the Const. 0 mux are the ones drawn in the
// paper's PE. The PE is purely combinational here; the sub-accelerator that
// uses it registers operands and results around it, so a PE result is ready
// in the same cycle as its operands. Arithmetic is Q16.16 (see gcod_pkg).
module pe
  import gcod_pkg::*;
(
  input  data_t   in_a,     // input element (adjacency value or feature)
  input  data_t   in_w,     // weight element (W row or X*W row element)
  input  pe_add_e add_sel,  // Const. 0 or partial sum into the adder
  input  data_t   acc_in,   // partial sum
  output data_t   out
);
  data_t prod;
  data_t addend;

  always_comb begin
    prod   = fx_mul(in_a, in_w);
    addend = (add_sel == PE_ADD_ACC) ? acc_in : data_t'(0);
    out    = prod + addend;
  end
endmodule
