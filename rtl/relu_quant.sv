// relu_quant: ReLU and 8-bit quantisation of one array row's results.
//
// A register array collects the row's ACC_W-bit result, which arrives bit-
// serially, LSB first, starting on the cycle start is high. When the last
// bit is in, the word is arithmetically shifted right by FRAC (the exponent
// of the smallest weight, 2^-6, so the result returns to the data's scale)
// and a comparator clips it to 0..255: negative values become 0 (ReLU),
// values above 255 become 255. The shape (register array, extracted 8-bit
// range, comparator, three-input multiplexer) follows the paper's ReLU &
// Quantization figure; truncation of the discarded fraction is this design's
// choice.
//
// Timing: valid pulses for one cycle, ACC_W cycles after start, with q.
// clip_lo / clip_hi tell which clipping, if any, took place.
module relu_quant #(
  parameter int ACC_W = 32,
  parameter int FRAC  = 6
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       bit_in,
  output logic       valid,
  output logic [7:0] q,
  output logic       clip_lo,
  output logic       clip_hi
);
  logic [ACC_W-2:0]         sreg;   // the first ACC_W-1 bits of the word
  logic [$clog2(ACC_W):0]   cnt;
  logic                     busy;
  logic [ACC_W-1:0]         word, shifted;

  // Word as it will be once the current (last) bit is shifted in.
  assign word    = {bit_in, sreg};
  assign shifted = ACC_W'($signed(word) >>> FRAC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sreg    <= '0;
      cnt     <= '0;
      busy    <= 1'b0;
      valid   <= 1'b0;
      q       <= '0;
      clip_lo <= 1'b0;
      clip_hi <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (start || busy) begin
        sreg <= word[ACC_W-1:1];
        cnt  <= start ? 1 : cnt + 1'b1;
        busy <= 1'b1;
        if (!start && cnt == ($clog2(ACC_W)+1)'(ACC_W-1)) begin
          busy  <= 1'b0;
          valid <= 1'b1;
          if (shifted[ACC_W-1]) begin
            q <= 8'd0;   clip_lo <= 1'b1; clip_hi <= 1'b0;
          end else if (shifted > ACC_W'(255)) begin
            q <= 8'd255; clip_lo <= 1'b0; clip_hi <= 1'b1;
          end else begin
            q <= shifted[7:0]; clip_lo <= 1'b0; clip_hi <= 1'b0;
          end
        end
      end
    end
  end
endmodule
