// tb_systolic_array: checks a 4 x 3 multiplication-free systolic array.
//
// Random packed weights (including zero weights) are loaded one row per
// cycle. The testbench then sends 24 pixels, one ACC_W-bit word every
// ACC_W cycles: column c gets its 8 channel bytes LSB first, delayed by c
// cycles (the skew the channel shifter would apply), with zero flags and a
// start flag on bit 0. Bias bits are supplied per row from bias_start, as
// the bias shifters do. Each row's result word (collected from row_start)
// must equal bias + sum over columns of +/- x[c][idx] * 2^(mag-1), and its
// first bit must leave row r exactly COLS + r cycles after the word entered
// column 0 (the array's rate: one word per ACC_W cycles, per row).
module tb_systolic_array;
  import accel_pkg::*;
  localparam int ROWS = 4, COLS = 3, ACC_W = 32, NPIX = 24;
  localparam int T = NPIX*ACC_W + COLS + ROWS + ACC_W + 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_row_we; logic [$clog2(ROWS)-1:0] w_row; wcode_t [COLS-1:0] w_data;
  lane_t [COLS-1:0] col_in; logic [ROWS-1:0] bias_in, row_out, row_start, bias_start;
  logic [ROWS-1:0][COLS-1:0] cell_active;
  systolic_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0, n_active = 0;
  wcode_t wt [ROWS][COLS];
  logic [ACC_W-1:0] bias [ROWS];
  logic [7:0] x [NPIX][COLS][LANES];
  lane_t stream [COLS][T];

  initial begin
    repeat (T + 2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ACC_W-1:0] expected(int p, int r);
    logic [ACC_W-1:0] s;
    s = bias[r];
    for (int c = 0; c < COLS; c++) begin
      wcode_t w;
      logic [ACC_W-1:0] t;
      w = wt[r][c];
      if (!mag_is_zero(w.mag)) begin
        t = ACC_W'(x[p][c][w.idx]) << (w.mag - 1);
        s = w.sign ? s + t : s - t;
      end
    end
    return s;
  endfunction

  initial begin
    int bk [ROWS];
    int ocnt [ROWS], opix [ROWS];
    logic [ACC_W-1:0] oword [ROWS];
    w_row_we = 0; w_row = '0; w_data = '0; col_in = '0; bias_in = '0;
    for (int r = 0; r < ROWS; r++) begin
      bias[r] = ACC_W'($urandom_range(0, 20000)) - ACC_W'(10000);
      for (int c = 0; c < COLS; c++) begin
        wt[r][c] = wcode_t'($urandom);
        if ($urandom_range(0, 4) == 0) wt[r][c].mag = 4'd0;
        else wt[r][c].mag = 4'($urandom_range(1, 7));
      end
    end
    for (int p = 0; p < NPIX; p++)
      for (int c = 0; c < COLS; c++)
        for (int l = 0; l < LANES; l++)
          x[p][c][l] = ($urandom_range(0, 3) == 0) ? 8'd0 : 8'($urandom);
    for (int c = 0; c < COLS; c++)
      for (int t = 0; t < T; t++) begin
        int tc, p, b;
        tc = t - c; p = tc / ACC_W; b = tc % ACC_W;
        stream[c][t] = '0;
        if (tc >= 0 && p < NPIX) begin
          stream[c][t].start = (b == 0);
          for (int l = 0; l < LANES; l++) begin
            stream[c][t].zf[l] = (x[p][c][l] == 0);
            stream[c][t].d[l]  = (b < 8) ? x[p][c][l][b] : 1'b0;
          end
        end
      end

    @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      w_row_we = 1; w_row = 2'(r);
      for (int c = 0; c < COLS; c++) w_data[c] = wt[r][c];
    end
    @(negedge clk); w_row_we = 0;
    repeat (3) @(negedge clk);

    for (int r = 0; r < ROWS; r++) begin bk[r] = ACC_W; ocnt[r] = -1; opix[r] = 0; end
    // Cycle t: inputs of cycle t are driven at the negedge before posedge t.
    for (int t = 0; t < T; t++) begin
      for (int c = 0; c < COLS; c++) col_in[c] = stream[c][t];
      #1;
      for (int r = 0; r < ROWS; r++) begin
        if (bias_start[r]) bk[r] = 0;
        bias_in[r] = (bk[r] < ACC_W) ? bias[r][bk[r]] : 1'b0;
        for (int c = 0; c < COLS; c++) n_active += int'(cell_active[r][c]);
      end
      @(posedge clk); #1;
      for (int r = 0; r < ROWS; r++) begin
        if (bk[r] < ACC_W) bk[r]++;
        if (row_start[r]) begin
          // first output bit of a word: must be at t = p*ACC_W + COLS + r
          checks++;
          if (t + 1 != opix[r]*ACC_W + COLS + r) begin
            failures++;
            $display("FAIL timing row %0d pixel %0d at cycle %0d", r, opix[r], t + 1);
          end
          ocnt[r] = 0;
        end
        if (ocnt[r] >= 0) begin
          oword[r][ocnt[r]] = row_out[r];
          ocnt[r]++;
          if (ocnt[r] == ACC_W) begin
            checks++;
            if (oword[r] !== expected(opix[r], r)) begin
              failures++;
              if (failures < 10) $display("FAIL row %0d pixel %0d got %h exp %h", r, opix[r], oword[r], expected(opix[r], r));
            end
            opix[r]++; ocnt[r] = -1;
          end
        end
      end
      @(negedge clk);
    end
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (opix[r] != NPIX) begin failures++; $display("FAIL row %0d produced %0d words", r, opix[r]); end
    end
    $display("active cell-cycles %0d", n_active);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
