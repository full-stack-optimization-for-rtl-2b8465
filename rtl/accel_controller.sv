// accel_controller: instruction sequencer of the accelerator.
//
// Executes a stream of instructions (accel_pkg::instr_t), one at a time,
// with a valid/ready handshake. A CNN is run as pairs of instructions per
// weight tile: Load Params, then Matrix Multiply (both bits may be set in
// one word; the load is done first).
//   Load Params: reads the tile's weights from the parameter buffer one
//     array row per cycle and writes them into the array (rows beyond the
//     tile height and columns beyond its width receive zero weights, masked
//     in the top), then pulses param_load so the bias shifters and the
//     channel shifter capture biases and shift directions. Busy for ROWS+1
//     cycles; the last row write and param_load follow one cycle later.
//   Matrix Multiply: for every output pixel, in raster order, issues the
//     pixel's input coordinates (times 2 for a strided layer) to the channel
//     shifter, one pixel every ACC_W cycles (one bit-serial word), then
//     waits a fixed drain time of COLS+ROWS+ACC_W+8 cycles for the last
//     results to reach the data buffer: busy for npix*ACC_W + DRAIN + 4
//     cycles in all. It also supplies the write-back
//     placement: output channel = tile_base + row, stored in bank
//     tile_base mod NB + row at address (tile_base div NB)*H*W + pixel.
//   After a multiply, tile_base advances by ROWS (vertical tiles); if the
//     instruction's last-tile bit is set the data-buffer halves swap (cur)
//     and tile_base returns to 0. In a linear layer nothing is written back;
//     the output accumulators are cleared at the start and score_valid
//     pulses at the end.
// The instruction's col_split field (log2 of 8/g, g = channels combined
// per column) is passed straight to the channel shifter on col_split.
// The instruction fields follow the paper's layout; the size-minus-one
// encoding, the last-tile and col_split fields, the one-pixel-per-word issue rate and the
// fixed drain are this design's choices.
module accel_controller
  import accel_pkg::*;
#(
  parameter int ROWS  = 128,
  parameter int COLS  = 64,
  parameter int ACC_W = 32,
  parameter int AW    = 12,
  localparam int NB   = COLS * LANES,
  localparam int NGRP = NB / ROWS,
  localparam int DRAIN = COLS + ROWS + ACC_W + 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  instr_t                    instr,
  input  logic                      instr_valid,
  output logic                      instr_ready,
  // weight load
  output logic [$clog2(ROWS)-1:0]   pb_raddr,
  output logic                      w_row_we,
  output logic [$clog2(ROWS)-1:0]   w_row,
  output logic                      param_load,
  output logic [6:0]                sa_h,
  output logic [6:0]                sa_w,
  // matrix multiply
  output logic                      issue,
  output logic [7:0]                ih,
  output logic [7:0]                iw,
  output logic [8:0]                in_h,
  output logic [8:0]                in_w,
  output logic [1:0]                col_split,
  output logic                      mm_start,
  output logic                      mm_busy,
  output logic                      linear,
  output logic                      score_valid,
  output logic [AW-1:0]             wr_base,
  output logic [$clog2(NGRP+1)-1:0] tile_grp,
  output logic                      cur,
  output logic                      busy
);
  typedef enum logic [2:0] {S_IDLE, S_DECODE, S_LOAD, S_MMSET, S_MM, S_DRAIN, S_FINISH} state_e;
  state_e state;

  instr_t                   iq;
  logic [$clog2(ROWS):0]    lcnt;
  logic [$clog2(ACC_W)-1:0] phase;
  logic [7:0]               oh, ow, out_h1, out_w1;
  logic [$clog2(DRAIN+1)-1:0] dcnt;
  logic [7:0]               tile_hi;
  logic [16:0]              hw_n;

  assign instr_ready = (state == S_IDLE);
  assign busy        = (state != S_IDLE);
  assign sa_h        = iq.sa_h;
  assign sa_w        = iq.sa_w;
  assign in_h        = 9'(iq.in_h) + 9'd1;
  assign in_w        = 9'(iq.in_w) + 9'd1;
  assign col_split   = iq.col_split;
  assign linear      = iq.linear;
  assign pb_raddr    = lcnt[$clog2(ROWS)-1:0];
  assign issue       = (state == S_MM) && (phase == '0);
  assign ih          = iq.strided ? 8'(oh << 1) : oh;
  assign iw          = iq.strided ? 8'(ow << 1) : ow;
  assign mm_busy     = (state == S_MM) || (state == S_DRAIN);

  // Output map size minus one.
  assign out_h1 = iq.strided ? 8'(iq.in_h >> 1) : iq.in_h;
  assign out_w1 = iq.strided ? 8'(iq.in_w >> 1) : iq.in_w;
  assign hw_n   = (17'(out_h1) + 17'd1) * (17'(out_w1) + 17'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      iq          <= '0;
      lcnt        <= '0;
      phase       <= '0;
      oh          <= '0;
      ow          <= '0;
      dcnt        <= '0;
      tile_hi     <= '0;
      tile_grp    <= '0;
      wr_base     <= '0;
      cur         <= 1'b0;
      w_row_we    <= 1'b0;
      w_row       <= '0;
      param_load  <= 1'b0;
      mm_start    <= 1'b0;
      score_valid <= 1'b0;
    end else begin
      w_row_we    <= 1'b0;
      param_load  <= 1'b0;
      mm_start    <= 1'b0;
      score_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (instr_valid) begin
          iq    <= instr;
          state <= S_DECODE;
        end
        S_DECODE: begin
          lcnt <= '0;
          if (iq.load)        state <= S_LOAD;
          else if (iq.matmul) state <= S_MMSET;
          else                state <= S_IDLE;
        end
        S_LOAD: begin
          // pb_raddr = lcnt now; next cycle its data is written into row lcnt.
          lcnt     <= lcnt + 1'b1;
          w_row_we <= 1'b1;
          w_row    <= $clog2(ROWS)'(lcnt);
          if (lcnt == ($clog2(ROWS)+1)'(ROWS-1)) begin
            param_load <= 1'b1;
            state      <= iq.matmul ? S_MMSET : S_IDLE;
          end
        end
        S_MMSET: begin
          wr_base  <= AW'(25'(tile_hi) * 25'(hw_n));
          mm_start <= 1'b1;
          oh       <= '0;
          ow       <= '0;
          phase    <= '0;
          state    <= S_MM;
        end
        S_MM: begin
          phase <= phase + 1'b1;
          if (phase == $clog2(ACC_W)'(ACC_W-1)) begin
            if (ow == out_w1) begin
              ow <= '0;
              if (oh == out_h1) begin
                dcnt  <= '0;
                state <= S_DRAIN;
              end else begin
                oh <= oh + 1'b1;
              end
            end else begin
              ow <= ow + 1'b1;
            end
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == $clog2(DRAIN+1)'(DRAIN)) state <= S_FINISH;
        end
        S_FINISH: begin
          score_valid <= iq.linear;
          if (iq.last_tile) begin
            cur      <= ~cur;
            tile_grp <= '0;
            tile_hi  <= '0;
          end else if (tile_grp == $clog2(NGRP+1)'(NGRP-1)) begin
            tile_grp <= '0;
            tile_hi  <= tile_hi + 1'b1;
          end else begin
            tile_grp <= tile_grp + 1'b1;
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The bit-serial word must leave room for the data and all weight shifts.
  initial begin
    assert (ACC_W >= DW + NSHIFT + 1) else $error("ACC_W too small");
    assert (NB % ROWS == 0) else $error("COLS*8 must be a multiple of ROWS");
  end
endmodule
