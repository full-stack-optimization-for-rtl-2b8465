// sac_acc: bit-serial accumulator of one Selector-Accumulator cell.
//
// Every cycle it takes one bit of the partial sum Y coming from the left
// neighbour and one bit of the selected, already shifted data stream Z, and
// produces one registered bit of Y + Z (or Y - Z for a negative weight).
// Words are two's complement, least significant bit first.
//
// Structure, as in the paper's accumulator figure: a serial negator (invert
// Z and add one, its carry kept in a register) whose output or Z itself is
// picked by the weight sign, then a serial full adder whose carry is kept in
// a register, then the output register. This design re-initialises the two
// carries on the first bit of every word (start): the adder carry to 0 and
// the negator carry to 1.
//
// Timing: y_out is the sum bit of the inputs one cycle earlier. en = 0
// freezes all three registers (the clock-enable form of the paper's gated
// clock); the enclosing cell then routes Y around this block.
module sac_acc (
  input  logic clk,
  input  logic en,
  input  logic start,
  input  logic neg,
  input  logic y_in,
  input  logic z,
  output logic y_out
);
  logic c_add_q;   // carry of the serial adder
  logic c_neg_q;   // carry of the serial negator
  logic c_add, c_neg, zn, zsel, s, c_add_n;

  always_comb begin
    c_add   = start ? 1'b0 : c_add_q;
    c_neg   = start ? 1'b1 : c_neg_q;
    zn      = ~z ^ c_neg;              // bit of (~Z + 1)
    zsel    = neg ? zn : z;
    s       = y_in ^ zsel ^ c_add;
    c_add_n = (y_in & zsel) | (y_in & c_add) | (zsel & c_add);
  end

  always_ff @(posedge clk) begin
    if (en) begin
      c_neg_q <= ~z & c_neg;
      c_add_q <= c_add_n;
      y_out   <= s;
    end
  end
endmodule
