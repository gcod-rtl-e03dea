// gcod_controller: top-level sequencer on the control/state bus.
//
// It accepts one operation at a time (cmd_valid with op, while not busy):
//   OP_COMBINE  : every chunk runs CHUNK_SPMM (combination, X*W, row-wise).
//   OP_FORWARD  : every chunk runs CHUNK_COPY (its X*W rows become its
//                 weights, kept on chip for the aggregation that follows).
//   OP_CLEAR    : every chunk empties its output buffer.
//   OP_AGGREGATE: every chunk runs CHUNK_SPMM on its diagonal block while the
//                 sparser branch walks its CSC columns, in parallel. The two
//                 branches are not synchronized until both are done; then the
//                 output sync of the sparser branch adds and emits the rows.
// done pulses for one cycle when the operation ends. cycles reports the length
// of the last operation and state the current step, for the host.
// The parallel branches, synchronization only at the end of aggregation and
// the output sync step are the paper's; the operation set and this sequencing
// are this design's choices.
module gcod_controller
  import gcod_pkg::*;
#(
  parameter int NUM_CHUNKS = 3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd_valid,
  input  op_e                    op,
  output logic                   busy,
  output logic                   done,
  // chunks
  output logic                   ck_cmd_valid,
  output chunk_cmd_e             ck_cmd,
  input  logic [NUM_CHUNKS-1:0]  ck_done,
  // sparser branch
  output logic                   sp_agg_start,
  input  logic                   sp_agg_done,
  output logic                   sp_sync_start,
  input  logic                   sp_sync_done,
  // state bus
  output logic [2:0]             state,
  output logic [31:0]            cycles
);
  typedef enum logic [2:0] {
    C_IDLE, C_CHUNKS, C_BRANCHES, C_SYNC, C_SYNC_WAIT
  } cstate_e;
  cstate_e st;

  logic [NUM_CHUNKS-1:0] ck_fin;
  logic                  sp_fin;
  logic [31:0]           cnt;

  assign busy  = (st != C_IDLE);
  assign state = st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= C_IDLE;
      ck_cmd_valid  <= 1'b0;
      ck_cmd        <= CHUNK_SPMM;
      sp_agg_start  <= 1'b0;
      sp_sync_start <= 1'b0;
      ck_fin        <= '0;
      sp_fin        <= 1'b0;
      done          <= 1'b0;
      cnt           <= '0;
      cycles        <= '0;
    end else begin
      ck_cmd_valid  <= 1'b0;
      sp_agg_start  <= 1'b0;
      sp_sync_start <= 1'b0;
      done          <= 1'b0;
      if (st != C_IDLE) cnt <= cnt + 1;
      ck_fin <= ck_fin | ck_done;
      if (sp_agg_done) sp_fin <= 1'b1;
      unique case (st)
        C_IDLE: begin
          if (cmd_valid) begin
            cnt          <= 32'd1;
            ck_fin       <= '0;
            sp_fin       <= 1'b0;
            ck_cmd_valid <= 1'b1;
            unique case (op)
              OP_COMBINE:   begin ck_cmd <= CHUNK_SPMM; st <= C_CHUNKS; end
              OP_FORWARD:   begin ck_cmd <= CHUNK_COPY; st <= C_CHUNKS; end
              OP_CLEAR:     begin ck_cmd <= CHUNK_CLR;  st <= C_CHUNKS; end
              default: begin
                ck_cmd       <= CHUNK_SPMM;
                sp_agg_start <= 1'b1;
                st           <= C_BRANCHES;
              end
            endcase
          end
        end
        C_CHUNKS: begin
          if (&(ck_fin | ck_done)) begin
            st     <= C_IDLE;
            done   <= 1'b1;
            cycles <= cnt;
          end
        end
        C_BRANCHES: begin
          if (&(ck_fin | ck_done) && (sp_fin || sp_agg_done)) begin
            sp_sync_start <= 1'b1;
            st            <= C_SYNC;
          end
        end
        C_SYNC: st <= C_SYNC_WAIT;
        C_SYNC_WAIT: begin
          if (sp_sync_done) begin
            st     <= C_IDLE;
            done   <= 1'b1;
            cycles <= cnt;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
