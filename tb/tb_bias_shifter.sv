// tb_bias_shifter: loads random 32-bit biases and checks that, from every
// start pulse, the 32 following output bits (the first in the start cycle)
// are the bias LSB first, and that the output is 0 after the word when no
// new start follows. A new bias loaded between words must take effect at
// the next start.
module tb_bias_shifter;
  localparam int ACC_W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load, start, bit_out; logic [ACC_W-1:0] bias;
  bias_shifter #(.ACC_W(ACC_W)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [ACC_W-1:0] b, got;
    load = 0; start = 0; bias = '0;
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      if (n % 4 == 0) begin
        b = $urandom; bias = b; load = 1;
        @(negedge clk); load = 0; bias = ~b;
      end
      for (int k = 0; k < ACC_W; k++) begin
        start = (k == 0);
        #1 got[k] = bit_out;
        @(negedge clk);
      end
      start = 0;
      checks++;
      if (got !== b) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d got %h exp %h", n, got, b);
      end
      if (n % 5 == 0) begin
        repeat (3) begin
          #1; checks++;
          if (bit_out !== 1'b0) failures++;
          @(negedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
