// tb_sac_cell: checks one Selector-Accumulator cell with zero-skipping.
//
// The testbench plays the register chain: it keeps the last NSHIFT input
// bundles so that win[k] is the input delayed by k cycles. Each 32-cycle
// word carries 8 random bytes (some zero) LSB first; before some words a new
// random packed weight is loaded. The cell's output word (one cycle late)
// must be Y + x[idx]*2^(mag-1) (or minus, for sign 0), and Y itself for a
// zero weight or a zero selected byte. In those skipped words active must
// stay low for the whole word; otherwise it must be high.
module tb_sac_cell;
  import accel_pkg::*;
  localparam int WB = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_we; wcode_t w_in; lane_t [NSHIFT-1:0] win; logic y_in, y_out, active;
  sac_cell dut (.*);

  int checks = 0, failures = 0, n_skip_w = 0, n_skip_x = 0, n_neg = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] x [LANES];
    logic [WB-1:0] yw, exp_w, got;
    wcode_t w;
    lane_t cur;
    bit skip, act_ok;
    w_we = 0; w_in = '0; win = '0; y_in = 0;
    @(negedge clk); rst_n = 1; @(negedge clk);
    w = '0;
    for (int n = 0; n < 400; n++) begin
      if (n % 3 == 0) begin
        w.idx = 3'($urandom_range(0, 7));
        w.sign = 1'($urandom_range(0, 1));
        w.mag = 4'($urandom_range(0, 9));   // 8, 9: undefined codes, read as zero
        w_in = w; w_we = 1;
        @(negedge clk); w_we = 0;
      end
      for (int l = 0; l < LANES; l++) x[l] = ($urandom_range(0, 3) == 0) ? 8'd0 : 8'($urandom);
      yw = $urandom;
      skip = mag_is_zero(w.mag) || x[w.idx] == 0;
      if (mag_is_zero(w.mag)) n_skip_w++; else if (x[w.idx] == 0) n_skip_x++;
      if (skip) exp_w = yw;
      else begin
        logic [WB-1:0] t;
        t = WB'(x[w.idx]) << (w.mag - 1);
        exp_w = w.sign ? yw + t : yw - t;
        if (!w.sign) n_neg++;
      end
      got = '0; act_ok = 1;
      for (int b = 0; b < WB; b++) begin
        cur.start = (b == 0);
        for (int l = 0; l < LANES; l++) begin
          cur.zf[l] = (x[l] == 0);
          cur.d[l]  = (b < 8) ? x[l][b] : 1'b0;
        end
        for (int k = NSHIFT-1; k > 0; k--) win[k] = win[k-1];
        win[0] = cur;
        y_in = yw[b];
        #1;
        if (active !== !skip) act_ok = 0;
        @(posedge clk); #1;
        got[b] = y_out;
        @(negedge clk);
      end
      checks += 2;
      if (got !== exp_w) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d w=%h x=%h got %h exp %h", n, w, x[w.idx], got, exp_w);
      end
      if (!act_ok) begin
        failures++;
        if (failures < 10) $display("FAIL active word %0d skip=%0d", n, skip);
      end
    end
    $display("zero-weight words %0d, zero-input words %0d, negative %0d", n_skip_w, n_skip_x, n_neg);
    checks++; if (n_skip_w == 0 || n_skip_x == 0 || n_neg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
