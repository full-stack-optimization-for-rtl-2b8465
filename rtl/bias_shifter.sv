// bias_shifter: feeds a filter row's bias into the first SAC of the row.
//
// A Load Params instruction captures the 32-bit two's-complement bias
// (load/bias). For every input word the bias is then sent bit-serially, LSB
// first, as the initial partial sum of the row: on the cycle where start is
// high bit 0 is output and the remaining bits are moved into a shift
// register, which supplies one bit per following cycle. After ACC_W bits the
// output stays 0 until the next start. The bias is in the accumulator's
// fixed-point scale (2^FRAC per data unit), a choice of this design.
//
// Timing: bit_out is combinational from start and the shift register, so
// bit k appears k cycles after start.
module bias_shifter #(
  parameter int ACC_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [ACC_W-1:0] bias,
  input  logic             start,
  output logic             bit_out
);
  logic [ACC_W-1:0] bias_q, sh_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bias_q <= '0;
      sh_q   <= '0;
    end else begin
      if (load) bias_q <= bias;
      if (start) sh_q <= bias_q >> 1;
      else       sh_q <= sh_q >> 1;
    end
  end

  assign bit_out = start ? bias_q[0] : sh_q[0];
endmodule
