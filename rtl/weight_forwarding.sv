// weight_forwarding: query-based weight forwarding between the branches.
//
// When the sparser branch needs weight row q (a row of X*W, equal to a column
// index of the adjacency matrix), it puts q on the query bus. Every chunk's
// index buffer compares q with the range of rows its WBuf currently holds and
// returns hit (the chunk side does the range check and computes the WBuf
// address q - w_base). This unit picks the lowest-numbered chunk that hits,
// asks it for the row, and one cycle later returns the row with resp_hit = 1.
// If no chunk holds the row, it answers resp_hit = 0 in the same one-cycle
// slot, and the sparser branch fetches the row from off-chip memory instead.
// Hits and misses are counted for the state bus. The decision "query the
// chunks' index buffers, compute the address from the known range, else go
// off-chip" is the paper's; the priority choice among several hitting chunks
// and the one-cycle timing are this design's.
module weight_forwarding
  import gcod_pkg::*;
#(
  parameter int NUM_CHUNKS = 3,
  parameter int LANES      = 1024,
  localparam int ROW_W     = LANES * DATA_W,
  localparam int CW        = (NUM_CHUNKS > 1) ? $clog2(NUM_CHUNKS) : 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // sparser-branch side
  input  logic                               q_valid,
  input  idx_t                               q_row,
  output logic                               resp_valid,
  output logic                               resp_hit,
  output logic [ROW_W-1:0]                   resp_data,
  // chunk side
  output idx_t                               fq_row,
  input  logic [NUM_CHUNKS-1:0]              fq_hit,
  output logic [NUM_CHUNKS-1:0]              fq_rd,
  input  logic [NUM_CHUNKS-1:0][ROW_W-1:0]   fq_data,
  // statistics
  output logic [31:0]                        n_hits,
  output logic [31:0]                        n_misses
);
  logic          any_hit;
  logic [CW-1:0] sel;
  logic [CW-1:0] sel_q;

  assign fq_row = q_row;

  always_comb begin
    any_hit = 1'b0;
    sel     = '0;
    for (int k = NUM_CHUNKS - 1; k >= 0; k--) begin
      if (fq_hit[k]) begin
        any_hit = 1'b1;
        sel     = CW'(k);
      end
    end
    fq_rd = '0;
    if (q_valid && any_hit) fq_rd[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      resp_hit   <= 1'b0;
      sel_q      <= '0;
      n_hits     <= '0;
      n_misses   <= '0;
    end else begin
      resp_valid <= q_valid;
      resp_hit   <= q_valid && any_hit;
      sel_q      <= sel;
      if (q_valid && any_hit)  n_hits   <= n_hits + 1;
      if (q_valid && !any_hit) n_misses <= n_misses + 1;
    end
  end

  assign resp_data = fq_data[sel_q];
endmodule
