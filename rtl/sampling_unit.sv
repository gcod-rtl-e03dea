// sampling_unit: node sampling over one column of the adjacency matrix.
//
// Given the entries [base, base+len) of one CSC column and a sample size
// n_sample, it emits entry addresses, one per cycle while ready is high.
// If n_sample is 0 (sampling off) or the column has at most n_sample
// non-zeros, every entry is emitted in order. Otherwise n_sample entries are
// picked at random: a 16-bit maximal-length Fibonacci LFSR
// (x^16 + x^14 + x^13 + x^11 + 1) advances once per pick and the pick is
// base + ((lfsr * len) >> 16), i.e. uniform with replacement.
// The linear shift register that picks non-zeros at random is the paper's; the
// polynomial, the scaling by multiply-and-shift and sampling with
// replacement are this design's choices.
// Timing: start is accepted in IDLE; the first address is valid the next
// cycle; done pulses one cycle after the last address is taken. A column
// with len == 0 gives done without any address.
module sampling_unit
  import gcod_pkg::*;
#(
  parameter int AW = 16,
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] base,
  input  logic [AW-1:0] len,
  input  logic [AW-1:0] n_sample,
  output logic          addr_valid,
  input  logic          addr_ready,
  output logic [AW-1:0] addr,
  output logic          sampled,   // current column is being sub-sampled
  output logic          done,
  output logic          busy
);
  logic [15:0]   lfsr;
  logic [AW-1:0] cnt, total, base_q, len_q;
  logic          rand_mode;
  logic [AW+15:0] scaled;

  assign busy       = (total != cnt) || addr_valid;
  assign sampled    = rand_mode;
  assign scaled     = lfsr * len_q;
  assign addr       = rand_mode ? base_q + AW'(scaled >> 16) : base_q + cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr       <= SEED;
      cnt        <= '0;
      total      <= '0;
      base_q     <= '0;
      len_q      <= '0;
      rand_mode  <= 1'b0;
      addr_valid <= 1'b0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !addr_valid) begin
        base_q     <= base;
        len_q      <= len;
        cnt        <= '0;
        rand_mode  <= (n_sample != 0) && (len > n_sample);
        total      <= ((n_sample != 0) && (len > n_sample)) ? n_sample : len;
        addr_valid <= (len != 0);
        done       <= (len == 0);
      end else if (addr_valid && addr_ready) begin
        cnt  <= cnt + 1'b1;
        lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
        if (cnt + 1'b1 == total) begin
          addr_valid <= 1'b0;
          done       <= 1'b1;
        end
      end
    end
  end
endmodule
