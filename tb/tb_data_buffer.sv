// tb_data_buffer: checks the ping-pong data buffer (4 banks of 16 bytes per
// half). With cur = 0 the host fills half 0 byte by byte while the array
// write ports fill half 1 in parallel; all 4 banks are then read back
// through the per-bank read ports (synchronous read: data after the edge
// that samples the address) and must show half
// 0. After cur flips, the reads must show half 1 and host writes go to
// half 1 while array writes go to half 0. A model of both halves gives the
// expected bytes.
module tb_data_buffer;
  localparam int NB = 4, DEPTH = 16, AW = 4;
  logic clk = 0;
  always #5 clk = ~clk;

  logic cur; logic [NB-1:0][AW-1:0] rd_addr, wr_addr; logic [NB-1:0][7:0] rd_data, wr_data;
  logic [NB-1:0] wr_en; logic hw_en; logic [$clog2(NB)-1:0] hw_bank; logic [AW-1:0] hw_addr;
  logic [7:0] hw_data;
  data_buffer #(.NB(NB), .DEPTH(DEPTH), .AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] model [2][NB][DEPTH];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all(input int half);
    // the address is applied before a clock edge, the byte is there after it
    for (int a = 0; a < DEPTH; a++) begin
      for (int b = 0; b < NB; b++) rd_addr[b] = AW'((a + b) % DEPTH);
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rd_data[b] !== model[half][b][(a + b) % DEPTH]) begin
          failures++;
          if (failures < 10) $display("FAIL half %0d bank %0d addr %0d got %h", half, b, (a+b)%DEPTH, rd_data[b]);
        end
      end
    end
  endtask

  // One cycle of simultaneous host and array writes; half = the host half.
  task automatic write_cycle(input int half);
    hw_en = 1; hw_bank = 2'($urandom); hw_addr = 4'($urandom); hw_data = 8'($urandom);
    model[half][hw_bank][hw_addr] = hw_data;
    for (int b = 0; b < NB; b++) begin
      wr_en[b] = 1'($urandom); wr_addr[b] = 4'($urandom); wr_data[b] = 8'($urandom);
      if (wr_en[b]) model[1-half][b][wr_addr[b]] = wr_data[b];
    end
    @(negedge clk);
    hw_en = 0; wr_en = '0;
  endtask

  initial begin
    cur = 0; rd_addr = '0; wr_addr = '0; wr_data = '0; wr_en = '0;
    hw_en = 0; hw_bank = '0; hw_addr = '0; hw_data = '0;
    // deterministic fill of both halves
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++)
      for (int b = 0; b < NB; b++) begin
        hw_en = 1; hw_bank = 2'(b); hw_addr = 4'(a); hw_data = 8'($urandom);
        model[0][b][a] = hw_data;
        wr_en = '0; wr_en[b] = 1; wr_addr[b] = 4'(a); wr_data[b] = 8'($urandom);
        model[1][b][a] = wr_data[b];
        @(negedge clk);
      end
    hw_en = 0; wr_en = '0;
    read_all(0);
    repeat (100) write_cycle(0);
    read_all(0);
    cur = 1; @(negedge clk);
    read_all(1);
    repeat (100) write_cycle(1);
    read_all(1);
    cur = 0; @(negedge clk);
    read_all(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
