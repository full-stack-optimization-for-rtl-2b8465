// tb_sac_acc: checks the bit-serial accumulator of the SAC cell.
//
// Streams back-to-back 32-bit words, LSB first, with a start flag on bit 0:
// a random partial sum Y and a random non-negative Z (up to 14 bits, the
// largest shifted byte), with a random sign. The output word, one cycle
// late, must equal Y + Z or Y - Z modulo 2^32. Words are also sent with
// en held low for a stretch in the middle of the stream, which must freeze
// the output.
module tb_sac_acc;
  localparam int WB = 32;
  logic clk = 0;
  always #5 clk = ~clk;

  logic en, start, neg, y_in, z, y_out;
  sac_acc dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WB-1:0] yw, zw, exp_w, got;
    logic held;
    en = 1; start = 0; neg = 0; y_in = 0; z = 0;
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      yw  = $urandom;
      if (n % 3 == 0) yw = WB'($urandom_range(0, 4000)) - WB'(2000);
      zw  = WB'($urandom_range(0, 16383));
      neg = 1'($urandom_range(0, 1));
      exp_w = neg ? yw - zw : yw + zw;
      got = '0;
      for (int b = 0; b < WB; b++) begin
        start = (b == 0); y_in = yw[b]; z = zw[b];
        @(posedge clk); #1;
        got[b] = y_out;
        @(negedge clk);
      end
      checks++;
      if (got !== exp_w) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d: y=%h z=%h neg=%0d got %h exp %h", n, yw, zw, neg, got, exp_w);
      end
    end
    // en low freezes the output register
    en = 0; held = y_out;
    repeat (5) begin
      y_in = ~y_in; z = ~z; start = 0;
      @(posedge clk); #1;
      checks++;
      if (y_out !== held) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
