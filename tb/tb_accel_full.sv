// tb_accel_full: the accelerator at its full size, 128 x 64 SAC cells
// (all of accel_top's default parameters: 512 banks of 4096 bytes per
// buffer half, 32-bit bit-serial words).
//
// A 512-channel 6 x 6 map is written straight into the 512 banks. Layer 1
// uses all 64 columns (8 channels each) and 256 filters in two vertical
// tiles of 128, stride 2 with random channel shifts; its 256 x 3 x 3 output
// is read back and compared with an integer reference model. Layer 2 is a
// linear layer 256 -> 128, packed 4 channels per column over all 64
// columns, whose output accumulator sums over the 9 pixels.
// Each multiply must take exactly npix*32 + 64 + 128 + 32 + 12 cycles (from
// the instruction cycle). Parameters of the second tile are written during
// the first tile's multiply; zero-weight and zero-input skipping are
// counted over all 8192 cells.
module tb_accel_full;
  import accel_pkg::*;

  localparam int ROWS = 128, COLS = 64, ACC_W = 32, DEPTH = 4096;   // the defaults of accel_top
  localparam int NB = COLS * LANES, AW = $clog2(DEPTH);
  localparam int PAW = $clog2(ROWS > COLS ? ROWS : COLS);
  localparam int MAXC = 512, MAXP = 36;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  instr_t instr; logic instr_valid, instr_ready, busy;
  logic pb_we; pbsel_e pb_wsel; logic [PAW-1:0] pb_waddr; logic [COLS*8-1:0] pb_wdata;
  logic img_we; logic [1:0] img_log2f; logic [8:0] img_w; logic [1:0] img_c;
  logic [7:0] img_y, img_x, img_data;
  logic raw_we; logic [$clog2(NB)-1:0] raw_bank; logic [AW-1:0] raw_addr; logic [7:0] raw_data;
  logic [$clog2(NB)-1:0] hr_bank; logic [AW-1:0] hr_addr; logic [7:0] hr_data;
  logic [ROWS-1:0][ACC_W-1:0] score; logic score_valid;
  logic [ROWS-1:0][COLS-1:0] cell_active; logic [ROWS-1:0] clip_lo, clip_hi;

  accel_top dut (.*);

  int checks = 0, failures = 0;
  int n_reshape = 0, n_tiles = 0, n_swap = 0, n_stride = 0, n_neg = 0, n_wzero_skip = 0;
  int n_izero_skip = 0, n_clip_lo = 0, n_clip_hi = 0, n_linear = 0, n_overlap = 0;
  int n_dir [5] = '{default: 0};

  // Reference state
  int fm  [MAXC][MAXP];    // current input map
  int nfm [MAXC][MAXP];    // next map
  int C, H, W;
  int G;                   // channels per column of the current layer
  wcode_t wt [MAXC][COLS]; // weights of all filters of the layer
  int bias [MAXC];
  int dir [NB];
  int tile_w [ROWS][COLS]; // magnitude of loaded tile (for skip checks)

  task automatic tick(); @(posedge clk); #1; endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic send(input instr_t i);
    instr = i; instr_valid = 1;
    do tick(); while (!(instr_ready === 1'b0 || busy));
    instr_valid = 0;
  endtask

  task automatic wait_idle(); while (busy) tick(); endtask

  task automatic pbw(input pbsel_e s, input int a, input logic [COLS*8-1:0] d);
    pb_we = 1; pb_wsel = s; pb_waddr = PAW'(a); pb_wdata = d;
    if (busy) n_overlap++;
    tick(); pb_we = 0;
  endtask

  task automatic hread(input int bank, input int addr, output int v);
    hr_bank = $clog2(NB)'(bank); hr_addr = AW'(addr); tick(); v = int'(hr_data);
  endtask

  function automatic int shifted_in(input int ch, input int y, input int x, input int d);
    int yy = y, xx = x;
    case (d)
      1: yy = y + 1; 2: yy = y - 1; 3: xx = x + 1; 4: xx = x - 1; default: ;
    endcase
    if (yy < 0 || yy >= H || xx < 0 || xx >= W) return 0;
    return fm[ch][yy*W + xx];
  endfunction

  // Random packed weights for F filters over C channels.
  task automatic gen_weights(input int F);
    for (int f = 0; f < F; f++) begin
      bias[f] = int'($urandom_range(0, 28000)) - 8000;
      for (int c = 0; c < COLS; c++) begin
        int nch = C - c*G;
        wt[f][c] = '0;
        if (nch > 0) begin
          wt[f][c].idx  = 3'($urandom_range(0, (nch > G ? G : nch) - 1));
          wt[f][c].mag  = 4'($urandom_range(0, 7));
          wt[f][c].sign = 1'($urandom_range(0, 1));
          if (wt[f][c].mag != 0 && !wt[f][c].sign) n_neg++;
        end
      end
    end
  endtask

  task automatic write_tile(input int t, input int F);
    for (int r = 0; r < ROWS; r++) begin
      logic [COLS*8-1:0] d = '0;
      int f = t*ROWS + r;
      for (int c = 0; c < COLS; c++) if (f < F) d[8*c +: 8] = wt[f][c];
      pbw(PB_WEIGHT, r, d);
      pbw(PB_BIAS, r, (f < F) ? (COLS*8)'(unsigned'(bias[f])) : '0);
    end
    for (int c = 0; c < COLS; c++) begin
      logic [COLS*8-1:0] d = '0;
      for (int l = 0; l < 8; l++) d[3*l +: 3] = 3'(dir[c*8+l]);
      pbw(PB_DIR, c, d);
    end
  endtask

  // Run one layer (all tiles) in hardware and in the reference model.
  task automatic run_layer(input int F, input bit strided, input bit lin, input int split, input string name);
    int Ho = strided ? (H+1)/2 : H, Wo = strided ? (W+1)/2 : W;
    int ntile = (F + ROWS - 1) / ROWS;
    longint t0; int cyc, v;
    instr_t i;
    G = 8 >> split;
    gen_weights(F);
    // reference
    for (int f = 0; f < F; f++)
      for (int oy = 0; oy < Ho; oy++) for (int ox = 0; ox < Wo; ox++) begin
        int acc = bias[f];
        int y = strided ? 2*oy : oy, x = strided ? 2*ox : ox;
        for (int c = 0; c < COLS; c++) if (wt[f][c].mag != 0 && wt[f][c].mag <= 7) begin
          int ch = c*G + int'(wt[f][c].idx);
          int term = shifted_in(ch, y, x, dir[ch]) << (int'(wt[f][c].mag) - 1);
          acc = wt[f][c].sign ? acc + term : acc - term;
        end
        if (lin) nfm[f][oy*Wo+ox] = acc;
        else begin
          int q = acc >>> FRAC;
          if (q < 0) begin q = 0; n_clip_lo++; end
          else if (q > 255) begin q = 255; n_clip_hi++; end
          nfm[f][oy*Wo+ox] = q;
        end
      end
    for (int ch = 0; ch < C; ch++) n_dir[dir[ch]]++;
    if (strided) n_stride++;
    // hardware
    write_tile(0, F);
    for (int t = 0; t < ntile; t++) begin
      int rows_used = (F - t*ROWS) < ROWS ? (F - t*ROWS) : ROWS;
      i = '0; i.load = 1; i.sa_h = 7'(rows_used-1); i.sa_w = 7'((C+G-1)/G-1); i.col_split = 2'(split);
      i.in_h = 8'(H-1); i.in_w = 8'(W-1);
      send(i); wait_idle();
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++)
        tile_w[r][c] = (t*ROWS+r < F && c <= (C+G-1)/G-1) ? int'(wt[t*ROWS+r][c].mag) : 0;
      i.load = 0; i.matmul = 1; i.strided = strided; i.linear = lin;
      i.last_tile = (t == ntile-1);
      t0 = $time;
      send(i);
      if (t+1 < ntile) write_tile(t+1, F);   // overlaps with the multiply
      wait_idle();
      cyc = int'(($time - t0) / 10);
      check(cyc == Ho*Wo*ACC_W + COLS + ROWS + ACC_W + 12 + 1,
            $sformatf("%s tile %0d latency %0d", name, t, cyc));
      n_tiles++;
      if (lin) begin
        for (int r = 0; r < rows_used; r++) begin
          int s = 0;
          for (int p = 0; p < Ho*Wo; p++) s += nfm[t*ROWS+r][p];
          check(int'(score[r]) == s, $sformatf("%s score %0d: %0d vs %0d", name, r, int'(score[r]), s));
        end
      end
    end
    if (!lin) begin
      C = F; H = Ho; W = Wo;
      for (int ch = 0; ch < C; ch++) for (int p = 0; p < H*W; p++) begin
        hread(ch % NB, (ch / NB)*H*W + p, v);
        check(v == nfm[ch][p], $sformatf("%s ch %0d pix %0d: %0d vs %0d", name, ch, p, v, nfm[ch][p]));
        fm[ch][p] = nfm[ch][p];
      end
    end
  endtask

  // Observe skipping inside the array during multiplies.
  logic cur_q;
  always @(posedge clk) begin
    cur_q <= dut.cur;
    if (rst_n && cur_q !== dut.cur) n_swap++;
    if (rst_n && score_valid) n_linear++;
    if (rst_n && dut.mm_busy) begin   // before reset the controller state is unknown
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
        if (tile_w[r][c] == 0 && cell_active[r][c]) begin
          failures++;
          if (failures < 5) $display("FAIL zero-weight cell %0d,%0d active t=%0t", r, c, $time);
        end
        if (tile_w[r][c] == 0) n_wzero_skip++;
        else if (!cell_active[r][c]) n_izero_skip++;
      end
    end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v;
    instr = '0; instr_valid = 0; pb_we = 0; pb_wsel = PB_WEIGHT; pb_waddr = '0; pb_wdata = '0;
    img_we = 0; img_log2f = 2'd0; img_w = 9'd6; img_c = 0; img_y = 0; img_x = 0; img_data = 0;
    raw_we = 0; raw_bank = 0; raw_addr = 0; raw_data = 0; hr_bank = 0; hr_addr = 0;
    repeat (3) tick(); rst_n = 1; tick();

    // A 512-channel 6 x 6 map, one channel per bank, written directly
    C = NB; H = 6; W = 6;
    for (int ch = 0; ch < C; ch++) for (int p = 0; p < H*W; p++) begin
      automatic int val = ($urandom_range(0, 3) == 0) ? 0 : int'($urandom_range(1, 255));
      fm[ch][p] = val;
      raw_we = 1; raw_bank = $clog2(NB)'(ch); raw_addr = AW'(p); raw_data = 8'(val);
      tick();
    end
    raw_we = 0;
    for (int ch = 0; ch < C; ch += 37) for (int p = 0; p < H*W; p += 5) begin
      hread(ch, p, v);
      check(v == fm[ch][p], $sformatf("raw ch %0d pix %0d", ch, p));
    end

    for (int b = 0; b < NB; b++) dir[b] = $urandom_range(0, 4);
    run_layer(256, 1, 0, 0, "L1");        // 512 -> 256 filters, stride 2, two tiles
    for (int b = 0; b < NB; b++) dir[b] = 0;
    run_layer(128, 0, 1, 1, "L2");        // linear 256 -> 128 over the 3 x 3 map

    repeat (4) tick();
    $display("mechanisms: tiles=%0d swaps=%0d strided=%0d neg=%0d wzero_skip=%0d izero_skip=%0d clip_lo=%0d clip_hi=%0d linear=%0d overlap=%0d dirs=%0d/%0d/%0d/%0d/%0d",
      n_tiles, n_swap, n_stride, n_neg, n_wzero_skip, n_izero_skip, n_clip_lo, n_clip_hi,
      n_linear, n_overlap, n_dir[0], n_dir[1], n_dir[2], n_dir[3], n_dir[4]);
    check(n_tiles == 3, "tiles");
    check(n_swap == 2, "buffer swaps");
    check(n_linear == 1, "linear layer");
    check(n_wzero_skip > 0 && n_izero_skip > 0, "zero skipping");
    check(n_overlap > 0, "parameter load during multiply");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
