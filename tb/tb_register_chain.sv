// tb_register_chain: checks that tap k of the column register chain is the
// input bundle delayed by exactly k cycles, for random bundles, and that tap
// 0 follows the input in the same cycle.
module tb_register_chain;
  import accel_pkg::*;
  localparam int ROWS = 5, NTAP = ROWS + NSHIFT - 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  lane_t d_in; lane_t [NTAP-1:0] taps;
  register_chain #(.ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;
  lane_t hist [NTAP];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d_in = '0;
    for (int k = 0; k < NTAP; k++) hist[k] = '0;
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      d_in = lane_t'($urandom);
      for (int k = NTAP-1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = d_in;
      #1;
      for (int k = 0; k < NTAP; k++) begin
        checks++;
        if (taps[k] !== hist[k]) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d tap %0d got %h exp %h", n, k, taps[k], hist[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
