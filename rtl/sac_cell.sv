// sac_cell: Selector-Accumulator (SAC) with zero-skipping.
//
// A systolic cell that needs no multiplier. Its column's register chain
// delays the bit-serial input by one cycle per stage, and a stream delayed k
// cycles is the input multiplied by 2^k. The cell therefore "multiplies" by
// its power-of-two weight just by picking a tap: win[k] is the chain tap k
// stages above the cell's base, and the weight magnitude code m (1..7, for
// 2^-6..2^0) selects tap m-1. The channel index of the packed weight selects
// which of the 8 channels combined into this column is used. The selected
// bit Z goes to sac_acc, which adds +Z or -Z to the partial sum Y flowing
// along the row.
//
// Zero-skipping (paper's zero-skipping figure): when the weight is zero, or
// the selected input word is zero, the cell's registers are held and Y is
// passed on through a bypass register, so y_out always has one cycle of
// latency. The decision is taken at the first bit of each word (start flag
// of the base tap) from the zero flag carried with the data, and kept for
// the rest of the word; the flags and this timing are choices of this design.
//
// Interface: w_we loads the 8-bit packed weight (accel_pkg::wcode_t).
// active is high in cycles where the accumulator is enabled.
module sac_cell
  import accel_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               w_we,
  input  wcode_t             w_in,
  input  lane_t [NSHIFT-1:0] win,
  input  logic               y_in,
  output logic               y_out,
  output logic               active
);
  wcode_t w_q;
  logic   skip_q, skip_now, sel_byp_q, byp_q, acc_out, z;
  logic   wzero;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    w_q <= '0;
    else if (w_we) w_q <= w_in;
  end

  assign wzero = mag_is_zero(w_q.mag);

  // Selector: tap by weight magnitude, channel by index.
  always_comb begin
    if (wzero) z = 1'b0;
    else       z = win[mag_to_shift(w_q.mag)].d[w_q.idx];
  end

  // Skip decision: always for a zero weight; for a zero input word, fixed
  // for the whole word at its first bit.
  assign skip_now = wzero | (win[0].start ? win[0].zf[w_q.idx] : skip_q);
  assign active   = ~skip_now;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      skip_q    <= 1'b1;
      sel_byp_q <= 1'b1;
      byp_q     <= 1'b0;
    end else begin
      skip_q    <= skip_now;
      sel_byp_q <= skip_now;
      byp_q     <= y_in;
    end
  end

  sac_acc u_acc (
    .clk  (clk),
    .en   (~skip_now),
    .start(win[0].start),
    .neg  (~w_q.sign),
    .y_in (y_in),
    .z    (z),
    .y_out(acc_out)
  );

  assign y_out = sel_byp_q ? byp_q : acc_out;
endmodule
