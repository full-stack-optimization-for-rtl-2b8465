// accel_top: bit-serial, multiplication-free CNN inference engine.
//
// One systolic array of Selector-Accumulator cells runs every layer of a
// CNN made of channel shift + 1x1 convolution + folded batch normalisation
// + ReLU layers. Layers whose filters outnumber the array rows are run as
// several vertical tiles. The blocks and their connections:
//
//   parameter_buffer --weights--> systolic_array (one row per cycle)
//                    --biases---> bias_shifter per row --> row's first cell
//                    --directions-> channel_shifter
//   data_buffer (input half) --> channel_shifter --bit-serial, skewed-->
//        systolic_array --row results--> relu_quant per row --> data_buffer
//                                    \-> output_accumulator per row --> score
//   accel_controller sequences instructions; input_reshaper maps image
//   pixels written by the host into the reshaped channel layout.
//
// External interfaces (plain signals):
//   instr/instr_valid/instr_ready - instruction stream (accel_pkg::instr_t)
//   pb_*   - parameter-buffer write port, fed from off-chip memory
//   img_*  - image write through input reshaping (F = 1 << img_log2f)
//   raw_*  - direct write of a byte into bank/address of the input half
//   hr_*   - host read of a byte from the input half (valid next cycle;
//            after a layer's last tile this is that layer's output)
//   score  - per-row sums of the last linear layer, valid at score_valid
//   cell_active      - which SAC cells compute (are not zero-skipped) now
//   clip_lo, clip_hi - per row, the last quantised result was clipped at
//                      0 (ReLU) or at 255
// Host writes and reads are only allowed while busy is low.
//
// Timing: counted from the cycle instr_valid is sampled, busy lasts
// (output pixels) * ACC_W + COLS + ROWS + ACC_W + 12 cycles for a matrix
// multiply and ROWS + 1 cycles for a parameter load (its last row is written
// one cycle after busy falls). Default sizes are
// those of the paper's FPGA (128 x 64 array, 8 channels per column, 32-bit
// accumulation); the bank depth is this design's choice.
module accel_top
  import accel_pkg::*;
#(
  parameter int ROWS  = 128,
  parameter int COLS  = 64,
  parameter int ACC_W = 32,
  parameter int DEPTH = 4096,
  localparam int NB   = COLS * LANES,
  localparam int AW   = $clog2(DEPTH),
  localparam int NGRP = NB / ROWS,
  localparam int PAW  = $clog2(ROWS > COLS ? ROWS : COLS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  instr_t                    instr,
  input  logic                      instr_valid,
  output logic                      instr_ready,
  output logic                      busy,
  input  logic                      pb_we,
  input  pbsel_e                    pb_wsel,
  input  logic [PAW-1:0]            pb_waddr,
  input  logic [COLS*8-1:0]         pb_wdata,
  input  logic                      img_we,
  input  logic [1:0]                img_log2f,
  input  logic [8:0]                img_w,
  input  logic [1:0]                img_c,
  input  logic [7:0]                img_y,
  input  logic [7:0]                img_x,
  input  logic [7:0]                img_data,
  input  logic                      raw_we,
  input  logic [$clog2(NB)-1:0]     raw_bank,
  input  logic [AW-1:0]             raw_addr,
  input  logic [7:0]                raw_data,
  input  logic [$clog2(NB)-1:0]     hr_bank,
  input  logic [AW-1:0]             hr_addr,
  output logic [7:0]                hr_data,
  output logic [ROWS-1:0][ACC_W-1:0] score,
  output logic                      score_valid,
  output logic [ROWS-1:0][COLS-1:0] cell_active,
  output logic [ROWS-1:0]           clip_lo,
  output logic [ROWS-1:0]           clip_hi
);
  // ---------------- controller ----------------
  logic [$clog2(ROWS)-1:0]   pb_raddr, w_row;
  logic                      w_row_we, param_load, issue, mm_start, mm_busy, linear, cur;
  logic [6:0]                sa_h, sa_w;
  logic [7:0]                ih, iw;
  logic [8:0]                in_h, in_w;
  logic [1:0]                col_split;
  logic [AW-1:0]             wr_base;
  logic [$clog2(NGRP+1)-1:0] tile_grp;

  accel_controller #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W), .AW(AW)) u_ctrl (
    .clk, .rst_n, .instr, .instr_valid, .instr_ready,
    .pb_raddr, .w_row_we, .w_row, .param_load, .sa_h, .sa_w,
    .issue, .ih, .iw, .in_h, .in_w, .col_split, .mm_start, .mm_busy, .linear,
    .score_valid, .wr_base, .tile_grp, .cur, .busy
  );

  // ---------------- parameter buffer ----------------
  logic [COLS*8-1:0]          pb_wrow;
  logic [ROWS-1:0][ACC_W-1:0] pb_bias;
  shdir_e [NB-1:0]            pb_dir;

  parameter_buffer #(.ROWS(ROWS), .COLS(COLS), .ACC_W(ACC_W)) u_pbuf (
    .clk, .rst_n, .we(pb_we), .wsel(pb_wsel), .waddr(pb_waddr), .wdata(pb_wdata),
    .w_raddr(pb_raddr), .w_rdata(pb_wrow), .bias(pb_bias), .dir(pb_dir)
  );

  // Weights outside the tile (row > sa_h or column > sa_w) are loaded as 0.
  wcode_t [COLS-1:0] w_data;
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      if (32'(w_row) <= 32'(sa_h) && c <= int'(sa_w)) w_data[c] = wcode_t'(pb_wrow[8*c +: 8]);
      else                                            w_data[c] = '0;
    end
  end

  // ---------------- data buffer and channel shifter ----------------
  logic [NB-1:0][AW-1:0] cs_addr, rd_addr, wr_addr;
  logic [NB-1:0][7:0]    rd_data, wr_data;
  logic [NB-1:0]         wr_en;
  lane_t [COLS-1:0]      col_in;
  logic                  hw_en;
  logic [$clog2(NB)-1:0] hw_bank, hr_bank_q;
  logic [AW-1:0]         hw_addr, rs_pix;
  logic [7:0]            hw_data, rs_ch;

  input_reshaper #(.AW(AW)) u_reshape (
    .log2f(img_log2f), .img_w(img_w), .c(img_c), .y(img_y), .x(img_x),
    .ch(rs_ch), .pix(rs_pix)
  );

  always_comb begin
    hw_en   = img_we || raw_we;
    hw_bank = img_we ? $clog2(NB)'(rs_ch) : raw_bank;
    hw_addr = img_we ? rs_pix : raw_addr;
    hw_data = img_we ? img_data : raw_data;
    for (int b = 0; b < NB; b++) rd_addr[b] = mm_busy ? cs_addr[b] : hr_addr;
  end

  always_ff @(posedge clk) hr_bank_q <= hr_bank;
  assign hr_data = rd_data[hr_bank_q];

  data_buffer #(.NB(NB), .DEPTH(DEPTH), .AW(AW)) u_dbuf (
    .clk, .cur, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data,
    .hw_en, .hw_bank, .hw_addr, .hw_data
  );

  channel_shifter #(.COLS(COLS), .AW(AW)) u_cshift (
    .clk, .rst_n, .load(param_load), .dir_in(pb_dir),
    .issue, .ih, .iw, .in_h, .in_w, .col_split,
    .rd_addr(cs_addr), .rd_data, .col_out(col_in)
  );

  // ---------------- systolic array and bias shifters ----------------
  logic [ROWS-1:0] bias_bits, bias_start, row_out, row_start;

  for (genvar r = 0; r < ROWS; r++) begin : g_bias
    bias_shifter #(.ACC_W(ACC_W)) u_bias (
      .clk, .rst_n, .load(param_load), .bias(pb_bias[r]),
      .start(bias_start[r]), .bit_out(bias_bits[r])
    );
  end

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .w_row_we, .w_row, .w_data, .col_in,
    .bias_in(bias_bits), .row_out, .row_start, .bias_start, .cell_active
  );

  // ---------------- per-row output units ----------------
  logic [ROWS-1:0]          rq_valid;
  logic [ROWS-1:0][7:0]     rq_q;
  logic [ROWS-1:0][AW-1:0]  pix_cnt;

  for (genvar r = 0; r < ROWS; r++) begin : g_out
    relu_quant #(.ACC_W(ACC_W), .FRAC(FRAC)) u_rq (
      .clk, .rst_n, .start(row_start[r]), .bit_in(row_out[r]),
      .valid(rq_valid[r]), .q(rq_q[r]), .clip_lo(clip_lo[r]), .clip_hi(clip_hi[r])
    );
    output_accumulator #(.ACC_W(ACC_W)) u_oacc (
      .clk, .rst_n, .clear(mm_start && linear), .en(linear),
      .start(row_start[r]), .bit_in(row_out[r]), .sum(score[r])
    );
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)           pix_cnt[r] <= '0;
      else if (mm_start)    pix_cnt[r] <= '0;
      else if (rq_valid[r]) pix_cnt[r] <= pix_cnt[r] + 1'b1;
    end
  end

  // Bank b takes row b mod ROWS when the tile's bank group is b div ROWS.
  always_comb begin
    for (int b = 0; b < NB; b++) begin
      wr_en[b]   = rq_valid[b % ROWS] && !linear && mm_busy
                   && (int'(tile_grp) == b / ROWS) && ((b % ROWS) <= int'(sa_h));
      wr_addr[b] = wr_base + pix_cnt[b % ROWS];
      wr_data[b] = rq_q[b % ROWS];
    end
  end
endmodule
