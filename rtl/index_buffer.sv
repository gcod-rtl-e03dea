// index_buffer: the IdxBuf of a sub-accelerator (Fig. 6(a)).
//
// It records which rows of the weight matrix currently sit in the WBuf:
// rows [w_base, w_base + w_count) stored from WBuf address 0 upward. A query
// with a weight row index (equal to a column index of the adjacency matrix)
// returns hit when the row is in range and the WBuf address q - w_base. This
// is the range check and address computation that query-based weight
// forwarding performs on a chunk's index buffer. It also holds the chunk's
// output row range [o_base, o_base + o_count), used to map node indices to
// OBuf addresses. The copy input loads the weight range from the output
// range, used when the chunk's own results become its weights.
// Registers are written on the clock edge; the query is combinational.
module index_buffer
  import gcod_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  we,        // load all four fields
  input  idx_t  w_base_in,
  input  idx_t  w_count_in,
  input  idx_t  o_base_in,
  input  idx_t  o_count_in,
  input  logic  copy,      // weight range := output range
  output idx_t  w_base,
  output idx_t  w_count,
  output idx_t  o_base,
  output idx_t  o_count,
  input  idx_t  q_row,     // weight-row query
  output logic  q_hit,
  output idx_t  q_addr,
  input  idx_t  o_row,     // output-row query
  output logic  o_hit,
  output idx_t  o_addr
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_base <= '0; w_count <= '0; o_base <= '0; o_count <= '0;
    end else if (we) begin
      w_base <= w_base_in; w_count <= w_count_in;
      o_base <= o_base_in; o_count <= o_count_in;
    end else if (copy) begin
      w_base <= o_base; w_count <= o_count;
    end
  end

  logic [IDX_W:0] w_end, o_end;
  assign w_end  = {1'b0, w_base} + {1'b0, w_count};
  assign o_end  = {1'b0, o_base} + {1'b0, o_count};
  assign q_hit  = (q_row >= w_base) && ({1'b0, q_row} < w_end);
  assign q_addr = q_row - w_base;
  assign o_hit  = (o_row >= o_base) && ({1'b0, o_row} < o_end);
  assign o_addr = o_row - o_base;
endmodule
