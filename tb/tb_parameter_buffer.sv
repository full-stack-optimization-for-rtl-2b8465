// tb_parameter_buffer: writes random weight rows, biases and shift
// directions into an 8-row, 4-column parameter buffer, overwrites some of
// them, and checks that a weight row reads back after the clock edge that
// samples w_raddr, and
// that the bias and direction outputs show the last values written.
module tb_parameter_buffer;
  import accel_pkg::*;
  localparam int ROWS = 8, COLS = 4, ACC_W = 32, NB = COLS*LANES;
  localparam int PAW = $clog2(ROWS > COLS ? ROWS : COLS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic we; pbsel_e wsel; logic [PAW-1:0] waddr; logic [COLS*8-1:0] wdata, w_rdata;
  logic [$clog2(ROWS)-1:0] w_raddr; logic [ROWS-1:0][ACC_W-1:0] bias; shdir_e [NB-1:0] dir;
  parameter_buffer #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W)) dut (.*);

  int checks = 0, failures = 0;
  logic [COLS*8-1:0] mw [ROWS];
  logic [ACC_W-1:0] mb [ROWS];
  shdir_e md [NB];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wsel = PB_WEIGHT; waddr = '0; wdata = '0; w_raddr = '0;
    for (int b = 0; b < NB; b++) md[b] = SH_NONE;
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      we = 1;
      case ($urandom_range(0, 2))
        0: begin
          wsel = PB_WEIGHT; waddr = PAW'($urandom_range(0, ROWS-1)); wdata = $urandom;
          mw[waddr] = wdata;
        end
        1: begin
          wsel = PB_BIAS; waddr = PAW'($urandom_range(0, ROWS-1)); wdata = $urandom;
          mb[waddr] = wdata[ACC_W-1:0];
        end
        default: begin
          wsel = PB_DIR; waddr = PAW'($urandom_range(0, COLS-1)); wdata = '0;
          for (int l = 0; l < LANES; l++) begin
            shdir_e d;
            d = shdir_e'($urandom_range(0, 4));
            wdata[3*l +: 3] = d;
            md[int'(waddr)*LANES + l] = d;
          end
        end
      endcase
      @(negedge clk);
    end
    we = 0;
    // w_raddr is applied before a clock edge; w_rdata shows that row after it
    for (int r = 0; r < ROWS; r++) begin
      w_raddr = 3'(r);
      @(negedge clk);
      checks += 2;
      if (w_rdata !== mw[r]) begin failures++; $display("FAIL weight row %0d", r); end
      if (bias[r] !== mb[r]) begin failures++; $display("FAIL bias row %0d", r); end
    end
    for (int b = 0; b < NB; b++) begin
      checks++;
      if (dir[b] !== md[b]) begin failures++; $display("FAIL dir bank %0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
