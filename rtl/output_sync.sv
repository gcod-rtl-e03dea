// output_sync: output synchronization of the two branches.
//
// The denser and sparser branches write their partial results into separate
// output buffers. After both have finished, this unit walks node rows
// first_row .. first_row+n_rows-1 and, for each row, reads the sparser
// branch's OBuf row and the denser-branch row of the chunk whose output range
// holds it (zero if none), adds the two element-wise, applies the activation
// and sends the row out, one row per cycle.
// Interface: start (one cycle) begins the walk; rd_row/rd_en go to both
// sides' read ports, whose data must arrive one cycle later on dense_data and
// sparse_data; out_valid/out_row/out_data carry the result rows with no
// back-pressure; done pulses in the same cycle as the last result row. The
// first row leaves 2 cycles after start, then one row per cycle. The adding of the two branches' results after both have
// finished is the paper's; the row-serial walk is this design's.
module output_sync
  import gcod_pkg::*;
#(
  parameter int LANES = 1024,
  localparam int ROW_W = LANES * DATA_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  idx_t               first_row,
  input  idx_t               n_rows,
  output logic               busy,
  output logic               done,
  // read side
  output logic               rd_en,
  output idx_t               rd_row,
  input  logic [ROW_W-1:0]   dense_data,
  input  logic [ROW_W-1:0]   sparse_data,
  // to the activation unit and back
  output data_t [LANES-1:0]  sum_vec,
  input  data_t [LANES-1:0]  act_vec,
  // result stream
  output logic               out_valid,
  output idx_t               out_row,
  output logic [ROW_W-1:0]   out_data
);
  idx_t cnt, end_row;
  logic active;
  logic s1_v;
  idx_t s1_row;

  assign rd_en  = active && (cnt != end_row);
  assign rd_row = cnt;
  assign busy   = active || s1_v;

  always_comb begin
    for (int i = 0; i < LANES; i++)
      sum_vec[i] = data_t'(dense_data[i*DATA_W +: DATA_W]) + data_t'(sparse_data[i*DATA_W +: DATA_W]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      end_row   <= '0;
      active    <= 1'b0;
      s1_v      <= 1'b0;
      s1_row    <= '0;
      out_valid <= 1'b0;
      out_row   <= '0;
      out_data  <= '0;
      done      <= 1'b0;
    end else begin
      done      <= 1'b0;
      out_valid <= s1_v;
      if (s1_v) begin
        out_row  <= s1_row;
        out_data <= act_vec;
      end
      s1_v   <= rd_en;
      s1_row <= cnt;
      if (start && !busy) begin
        active  <= 1'b1;
        cnt     <= first_row;
        end_row <= first_row + n_rows;
      end else if (active) begin
        if (cnt != end_row) cnt <= cnt + 1'b1;
        else active <= 1'b0;
      end
      if (active && cnt == end_row) done <= 1'b1;
    end
  end
endmodule
