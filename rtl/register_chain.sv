// register_chain: the shared register chain of one systolic-array column.
//
// The column's bit-serial input bundle (8 channel bits, their zero flags and
// a word-start flag, accel_pkg::lane_t) enters at tap 0 and moves up one
// register per cycle. taps[k] is the input delayed by k cycles. The chain
// serves twice, as in the paper: it carries the data past every cell of the
// column, and because the data are sent least significant bit first, a tap
// k stages further up is the same word multiplied by 2^k. Row r of the array
// uses taps r .. r+NSHIFT-1 as its window (one register per row is this
// design's spacing; adjacent windows overlap in all but one tap).
//
// Timing: taps[0] is combinational from d_in; taps[k] = d_in k cycles ago.
module register_chain
  import accel_pkg::*;
#(
  parameter int ROWS   = 128,
  parameter int NTAP   = ROWS + NSHIFT - 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  lane_t                d_in,
  output lane_t [NTAP-1:0]     taps
);
  lane_t regs [1:NTAP-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k < NTAP; k++) regs[k] <= '0;
    end else begin
      regs[1] <= d_in;
      for (int k = 2; k < NTAP; k++) regs[k] <= regs[k-1];
    end
  end

  always_comb begin
    taps[0] = d_in;
    for (int k = 1; k < NTAP; k++) taps[k] = regs[k];
  end
endmodule
