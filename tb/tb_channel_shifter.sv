// tb_channel_shifter: checks channel shift, column-combining lane
// selection, serialisation and skew for 2 columns (16 banks) on a 5 x 6 map
// held in a model of the data buffer (synchronous read).
//
// Five passes alternate stride 1 and stride 2, each with new random shift
// directions, and use col_split 0, 1, 2, 3, 0 (8, 4, 2, 1, 8 channels per
// column). All output pixels are issued ACC_W cycles apart. For every pixel
// and lane l of column c, the 32-bit word must be the shifted byte of bank
// c*g + l (0 outside the map, and 0 for lanes l >= g), LSB first with zeros
// above bit 7. The zero flag must be set exactly when that byte is 0, and
// the start flag must be on bit 0. Bit 0 of column c must appear right after
// the (c+2)-th clock edge, counting the edge that samples issue as edge 1.
module tb_channel_shifter;
  import accel_pkg::*;
  localparam int COLS = 2, AW = 8, NB = COLS*LANES, ACC_W = 32, H = 5, W = 6;
  localparam int TMAX = 160*ACC_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load, issue; shdir_e [NB-1:0] dir_in; logic [7:0] ih, iw; logic [8:0] in_h, in_w; logic [1:0] col_split;
  logic [NB-1:0][AW-1:0] rd_addr; logic [NB-1:0][7:0] rd_data; lane_t [COLS-1:0] col_out;
  channel_shifter #(.COLS(COLS), .AW(AW)) dut (.*);

  logic [7:0] mem [NB][H*W];
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++) rd_data[b] <= (int'(rd_addr[b]) < H*W) ? mem[b][rd_addr[b]] : 8'hxx;

  int checks = 0, failures = 0;
  int dcount [5] = '{default: 0};
  lane_t trace [COLS][TMAX];
  int cyc = 0;
  always @(posedge clk) begin
    #1;
    if (cyc < TMAX) for (int c = 0; c < COLS; c++) trace[c][cyc] = col_out[c];
    cyc++;
  end

  initial begin
    repeat (3*TMAX) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] shifted(int b, shdir_e d, int h, int w);
    int sh, sw;
    sh = h; sw = w;
    case (d)
      SH_UP:    sh = h + 1;
      SH_DOWN:  sh = h - 1;
      SH_LEFT:  sw = w + 1;
      SH_RIGHT: sw = w - 1;
      default: ;
    endcase
    if (sh < 0 || sh >= H || sw < 0 || sw >= W) return 8'd0;
    return mem[b][sh*W + sw];
  endfunction

  initial begin
    load = 0; issue = 0; dir_in = '{default: SH_NONE}; ih = 0; iw = 0; col_split = 0;
    in_h = 9'(H); in_w = 9'(W);
    for (int b = 0; b < NB; b++)
      for (int a = 0; a < H*W; a++) mem[b][a] = ($urandom_range(0, 3) == 0) ? 8'd0 : 8'($urandom);
    @(negedge clk); rst_n = 1;
    for (int pass = 0; pass < 5; pass++) begin
      int s, g;
      shdir_e dirs [NB];
      int oh_n, ow_n, t0, npix;
      int icyc [64];
      s = (pass % 2) + 1;
      col_split = 2'(pass % 4);
      g = 8 >> col_split;
      oh_n = (H + s - 1) / s; ow_n = (W + s - 1) / s;
      for (int b = 0; b < NB; b++) begin
        dirs[b] = shdir_e'($urandom_range(0, 4));
        dir_in[b] = dirs[b];
        dcount[dirs[b]]++;
      end
      @(negedge clk); load = 1; @(negedge clk); load = 0;
      // wait until cycle counter reaches a clean point
      repeat (2) @(negedge clk);
      t0 = cyc; npix = 0;
      for (int oh = 0; oh < oh_n; oh++)
        for (int ow = 0; ow < ow_n; ow++) begin
          issue = 1; ih = 8'(oh*s); iw = 8'(ow*s);
          icyc[npix] = cyc;   // the next edge samples issue and writes trace[icyc]
          npix++;
          @(negedge clk); issue = 0;
          repeat (ACC_W - 1) @(negedge clk);
        end
      repeat (ACC_W + COLS + 4) @(negedge clk);
      // check trace
      for (int p = 0; p < npix; p++) begin
        int oh, ow;
        oh = p / ow_n; ow = p % ow_n;
        for (int c = 0; c < COLS; c++) begin
          int tb;
          tb = icyc[p] + 1 + c;   // trace index of bit 0
          checks++;
          if (!trace[c][tb].start || (tb > 0 && trace[c][tb-1].start)) begin
            failures++;
            if (failures < 10) $display("FAIL start s=%0d pixel %0d col %0d", s, p, c);
          end
          for (int l = 0; l < LANES; l++) begin
            int b;
            logic [ACC_W-1:0] got;
            logic [7:0] e;
            int src;
            b = c*LANES + l;
            src = c*g + l;
            e = (l < g) ? shifted(src, dirs[src], oh*s, ow*s) : 8'd0;
            for (int k = 0; k < ACC_W; k++) got[k] = trace[c][tb+k].d[l];
            checks += 2;
            if (got !== ACC_W'(e)) begin
              failures++;
              if (failures < 10) $display("FAIL data s=%0d g=%0d pixel %0d lane %0d got %h exp %h", s, g, p, b, got, e);
            end
            if (trace[c][tb].zf[l] !== (e == 8'd0)) failures++;
          end
        end
      end
    end
    $display("directions used: %0d %0d %0d %0d %0d", dcount[0], dcount[1], dcount[2], dcount[3], dcount[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
