// tb_accel_controller: checks the instruction controller on an 8-row,
// 4-column configuration (4 bank groups).
//
//   1. A load instruction must write array rows 0..7 in order, each from
//      the parameter-buffer row addressed in the previous cycle, pulse
//      param_load once with the last row, and be busy for ROWS + 1 cycles
//      (the last row write and param_load come one cycle after busy ends).
//   2. A load+matmul, stride 2, on a 3 x 5 input must issue the 2 x 3
//      output pixels exactly ACC_W cycles apart with the doubled input
//      coordinates, pulse mm_start once, and take
//      ROWS + 1 + 1 + npix*ACC_W + (DRAIN + 1) + 1 cycles.
//   3. Matmul-only instructions on a 2 x 2 map must take
//      npix*ACC_W + DRAIN + 4 cycles, place tiles in bank groups 0,1,2,3
//      and then group 0 again at write base hw (= 4), flip cur only on a
//      last_tile instruction, and pulse score_valid once for a linear one.
module tb_accel_controller;
  import accel_pkg::*;
  localparam int ROWS = 8, COLS = 4, ACC_W = 32, AW = 8;
  localparam int NGRP = COLS*LANES/ROWS, DRAIN = COLS + ROWS + ACC_W + 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  instr_t instr; logic instr_valid, instr_ready;
  logic [$clog2(ROWS)-1:0] pb_raddr, w_row; logic w_row_we, param_load;
  logic [6:0] sa_h, sa_w; logic issue; logic [7:0] ih, iw; logic [8:0] in_h, in_w; logic [1:0] col_split;
  logic mm_start, mm_busy, linear, score_valid; logic [AW-1:0] wr_base;
  logic [$clog2(NGRP+1)-1:0] tile_grp; logic cur, busy;
  accel_controller #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W), .AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_rows = 0, n_pl = 0, n_mms = 0, n_sv = 0, n_issue = 0, last_issue = -1;
  int row_seq [$];
  int iss_h [$], iss_w [$];
  logic [$clog2(ROWS)-1:0] prev_raddr;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // Events are counted only after reset: before it the outputs are unknown.
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (w_row_we) begin
      row_seq.push_back(int'(w_row));
      if (w_row !== prev_raddr) begin failures++; $display("FAIL row %0d loaded from address %0d", w_row, prev_raddr); end
    end
    prev_raddr = pb_raddr;
    if (param_load) n_pl++;
    if (mm_start) n_mms++;
    if (score_valid) n_sv++;
    if (issue) begin
      if (last_issue >= 0) begin
        checks++;
        if (cyc - last_issue != ACC_W) begin failures++; $display("FAIL issue spacing %0d", cyc - last_issue); end
      end
      last_issue = cyc;
      n_issue++;
      iss_h.push_back(int'(ih)); iss_w.push_back(int'(iw));
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Send one instruction and return the number of cycles until ready again.
  task automatic send(input instr_t i, output int cycles);
    int t0;
    @(negedge clk);
    check(instr_ready, "ready before instruction");
    instr = i; instr_valid = 1;
    t0 = cyc;
    @(negedge clk); instr_valid = 0; instr = '0;
    while (!instr_ready) @(negedge clk);
    cycles = cyc - t0 - 1;
  endtask

  initial begin
    instr_t i;
    int cycles, npix;
    instr = '0; instr_valid = 0;
    @(negedge clk); rst_n = 1;

    // 1. load only
    i = '0; i.load = 1; i.sa_h = 7'(ROWS-1); i.sa_w = 7'(COLS-1);
    send(i, cycles);
    check(cycles == ROWS + 1, $sformatf("load time %0d", cycles));
    @(negedge clk);   // the last row write is registered one cycle later
    check(row_seq.size() == ROWS, "row count");
    for (int r = 0; r < row_seq.size(); r++) check(row_seq[r] == r, "row order");
    check(n_pl == 1, "param_load count");

    // 2. load + strided matmul on 3 x 5
    row_seq.delete(); last_issue = -1; n_issue = 0;
    i = '0; i.load = 1; i.matmul = 1; i.strided = 1; i.in_h = 8'd2; i.in_w = 8'd4;
    send(i, cycles);
    npix = 2 * 3;
    check(cycles == ROWS + 3 + npix*ACC_W + DRAIN + 1, $sformatf("load+matmul time %0d", cycles));
    check(n_issue == npix, "issue count");
    for (int p = 0; p < npix && p < iss_h.size(); p++)
      check(iss_h[p] == 2*(p/3) && iss_w[p] == 2*(p%3), $sformatf("pixel %0d at (%0d,%0d)", p, iss_h[p], iss_w[p]));
    check(n_mms == 1, "mm_start count");
    check(tile_grp == 1 && cur == 0, "after first tile");

    // 3. matmul-only tiles on 2 x 2; tile 1 was above; run 3 more, wrap
    i = '0; i.matmul = 1; i.in_h = 8'd1; i.in_w = 8'd1;
    for (int t = 1; t < NGRP + 1; t++) begin
      last_issue = -1;
      send(i, cycles);
      check(cycles == 4*ACC_W + DRAIN + 4, $sformatf("matmul time %0d", cycles));
    end
    check(tile_grp == 1, "group wrapped");
    // next tile goes to group 1 of the second slot: base must be hw = 4
    last_issue = -1;
    @(negedge clk); instr = i; instr_valid = 1;
    @(negedge clk); instr_valid = 0;
    repeat (2) @(negedge clk);
    check(wr_base == AW'(4), $sformatf("write base %0d", wr_base));
    while (!instr_ready) @(negedge clk);
    check(cur == 0, "no swap without last_tile");
    i.last_tile = 1; i.linear = 1;
    last_issue = -1;
    send(i, cycles);
    check(cur == 1 && tile_grp == 0, "swap on last tile");
    repeat (2) @(negedge clk);
    check(n_sv == 1, "score_valid count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
