// output_accumulator: sums one array row's results over all pixels.
//
// Used only for the final, fully connected layer. Global average pooling is
// folded into that layer's weights (W/R), so the class score is the sum of
// the row's outputs over the R pixels. Each ACC_W-bit result arrives
// bit-serially, LSB first, from the cycle start is high; it is held in a
// register array until its last bit arrives and then added to the running
// sum (wrap-around two's complement). clear zeroes the sum; en gates the
// whole block, which is idle outside the linear layer.
//
// Timing: sum is updated one cycle after the last bit of a word.
module output_accumulator #(
  parameter int ACC_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             en,
  input  logic             start,
  input  logic             bit_in,
  output logic [ACC_W-1:0] sum
);
  logic [ACC_W-2:0]       sreg;   // the first ACC_W-1 bits of the word
  logic [$clog2(ACC_W):0] cnt;
  logic                   busy;
  logic [ACC_W-1:0]       word;

  assign word = {bit_in, sreg};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sreg <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      sum  <= '0;
    end else begin
      if (clear) begin
        sum  <= '0;
        busy <= 1'b0;
      end else if (en && (start || busy)) begin
        sreg <= word[ACC_W-1:1];
        cnt  <= start ? 1 : cnt + 1'b1;
        busy <= 1'b1;
        if (!start && cnt == ($clog2(ACC_W)+1)'(ACC_W-1)) begin
          busy <= 1'b0;
          sum  <= sum + word;
        end
      end
    end
  end
endmodule
