// spmm_engine: the SpMM engine of a sub-accelerator (Fig. 6(b)).
//
// LANES PEs work side by side on one row of weights. The input operand of
// each PE is either the lane's own element of in_vec (dense vectors) or, when
// bcast is set, lane 0 of in_vec sent to every PE: that is how one non-zero of
// a sparse matrix (COO or CSC) multiplies a whole weight row. The output stage
// ("Inner Prod./Element-wise Mult." in the figure) either passes the LANES PE
// results out unchanged (SPMM_ELEMWISE, each PE adding its own partial sum
// acc_vec[i] or 0) or sums them with an adder tree into one inner product
// (SPMM_INNER, the PEs add 0 and acc_vec[0] is added at the root).
// Combinational: results follow the operands in the same cycle. The adder
// tree instead of a chain of PEs is this design's choice.
module spmm_engine
  import gcod_pkg::*;
#(
  parameter int LANES = 1024
) (
  input  spmm_mode_e          mode,
  input  logic                bcast,
  input  data_t [LANES-1:0]   in_vec,
  input  data_t [LANES-1:0]   w_vec,
  input  data_t [LANES-1:0]   acc_vec,
  input  logic                acc_en,   // 0: PEs add Const. 0
  output data_t [LANES-1:0]   out_vec,  // element-wise results
  output data_t               out_sum   // inner product (+ acc_vec[0])
);
  data_t [LANES-1:0] pe_out;
  pe_add_e           sel;

  assign sel = (acc_en && mode == SPMM_ELEMWISE) ? PE_ADD_ACC : PE_ADD_ZERO;

  for (genvar i = 0; i < LANES; i++) begin : g_pe
    pe u_pe (
      .in_a   (bcast ? in_vec[0] : in_vec[i]),
      .in_w   (w_vec[i]),
      .add_sel(sel),
      .acc_in (acc_vec[i]),
      .out    (pe_out[i])
    );
  end

  // Balanced adder tree over the PE outputs.
  localparam int LEVELS = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int LEAVES = 1 << LEVELS;
  data_t tree [LEVELS+1][LEAVES];

  always_comb begin
    for (int i = 0; i < LEAVES; i++)
      tree[0][i] = (i < LANES) ? pe_out[i] : data_t'(0);
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < LEAVES; i++)
        tree[l][i] = (i < (LEAVES >> l)) ? tree[l-1][2*i] + tree[l-1][2*i+1] : data_t'(0);
  end

  assign out_vec = pe_out;
  assign out_sum = tree[LEVELS][0] + (acc_en ? acc_vec[0] : data_t'(0));
endmodule
