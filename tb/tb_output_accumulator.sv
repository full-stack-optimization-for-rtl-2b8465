// tb_output_accumulator: sends groups of random signed 32-bit words LSB
// first, some back to back, and checks the running sum after each word and
// at the end of a group; clear must zero the sum, and with en low words
// must be ignored.
module tb_output_accumulator;
  localparam int ACC_W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, en, start, bit_in; logic [ACC_W-1:0] sum;
  output_accumulator #(.ACC_W(ACC_W)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_word(input logic [ACC_W-1:0] v);
    for (int k = 0; k < ACC_W; k++) begin
      start = (k == 0); bit_in = v[k];
      @(negedge clk);
    end
    start = 0; bit_in = 0;
  endtask

  initial begin
    logic [ACC_W-1:0] s, v;
    clear = 0; en = 0; start = 0; bit_in = 0;
    @(negedge clk); rst_n = 1;
    for (int g = 0; g < 20; g++) begin
      clear = 1; @(negedge clk); clear = 0;
      checks++; if (sum !== '0) failures++;
      en = (g % 5 != 4);
      s = '0;
      for (int n = 0; n < 12; n++) begin
        v = (n % 2) ? ACC_W'($urandom) : ACC_W'($urandom_range(0, 100000)) - ACC_W'(50000);
        send_word(v);
        if (en) s = s + v;
        checks++;
        if (sum !== s) begin
          failures++;
          if (failures < 10) $display("FAIL group %0d word %0d sum %h exp %h", g, n, sum, s);
        end
        if (n % 3 == 0) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
