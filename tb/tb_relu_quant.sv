// tb_relu_quant: streams random signed 32-bit results LSB first and checks
// the quantised byte: the word shifted right arithmetically by 6 and
// clipped to 0..255, with the clip flags, arriving with valid exactly 32
// cycles after the start cycle. Values are drawn around the clipping
// points so that both clips and the pass-through case occur.
module tb_relu_quant;
  localparam int ACC_W = 32, FRAC = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, bit_in, valid, clip_lo, clip_hi; logic [7:0] q;
  relu_quant #(.ACC_W(ACC_W), .FRAC(FRAC)) dut (.*);

  int checks = 0, failures = 0, n_lo = 0, n_hi = 0, n_mid = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, e;
    bit elo, ehi;
    start = 0; bit_in = 0;
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      case (n % 4)
        0: v = int'($urandom_range(0, 16383));
        1: v = -int'($urandom_range(0, 100000));
        2: v = int'($urandom_range(16384, 200000));
        default: v = int'($urandom);
      endcase
      e = v >>> FRAC; elo = 0; ehi = 0;
      if (e < 0) begin e = 0; elo = 1; n_lo++; end
      else if (e > 255) begin e = 255; ehi = 1; n_hi++; end
      else n_mid++;
      // valid must stay low until the last bit has been clocked in, then
      // be high for exactly one cycle (ACC_W cycles after the start cycle).
      for (int k = 0; k < ACC_W; k++) begin
        start = (k == 0); bit_in = v[k];
        @(negedge clk);
        if (k < ACC_W-1) begin
          checks++;
          if (valid !== 1'b0) begin failures++; $display("FAIL early valid word %0d bit %0d", n, k); end
        end
      end
      start = 0; bit_in = 0;
      checks++;
      if (!(valid === 1'b1 && q == 8'(e) && clip_lo == elo && clip_hi == ehi)) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d v=%0d q=%0d exp %0d valid=%0d", n, v, q, e, valid);
      end
      @(negedge clk);
      checks++;
      if (valid !== 1'b0) failures++;
    end
    checks++; if (n_lo == 0 || n_hi == 0 || n_mid == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
