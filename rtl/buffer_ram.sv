// buffer_ram: on-chip buffer used for FBuf, WBuf, OBuf and the CSC arrays.
//
// DEPTH words of WIDTH bits with one write port and NRD independent read
// ports. Reads are synchronous: the word at raddr[p] appears on rdata[p]
// after the next clock edge (block RAM style). A read and a write to the same
// address in one cycle return the old word; users that need the new word
// bypass it themselves. There is no reset: contents are whatever was last
// written. The paper says buffers are block RAM or LUT RAM depending on size
// and ports; the port count and read latency are this design's choices.
module buffer_ram #(
  parameter int DEPTH = 256,
  parameter int WIDTH = 32,
  parameter int NRD   = 2,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [AW-1:0]              waddr,
  input  logic [WIDTH-1:0]           wdata,
  input  logic [NRD-1:0][AW-1:0]     raddr,
  output logic [NRD-1:0][WIDTH-1:0]  rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    always_ff @(posedge clk) rdata[p] <= mem[raddr[p]];
  end
endmodule
