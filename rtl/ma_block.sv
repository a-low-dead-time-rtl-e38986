// ma_block: arithmetic ("multiply and add") block of one back-end stage.
//
// Given the index P of the first of the two selected pieces and their local
// sums, returns the position of the transition, counted as the number of
// taps ahead of it:
//   1-0 transition (flag of piece P is 1): R = P*W + Sum
//   0-1 transition (flag of piece P is 0): R = P*W + (2*W - Sum)
// with W the piece width and Sum the sum of the two local sums. For a 0-1
// transition the block in effect counts zeros instead of ones. P*W has a
// constant weight and reduces to shifts and adders. The kind of transition
// is returned too.
//
// Combinational.
module ma_block
  import tdc_pkg::*;
#(
  parameter int unsigned TAPS    = 216,
  parameter int unsigned PIECE_W = 24,
  localparam int unsigned NP     = TAPS / PIECE_W,
  localparam int unsigned IDX_W  = $clog2(NP - 1 > 1 ? NP - 1 : 2),
  localparam int unsigned LS_W   = $clog2(PIECE_W + 1),
  localparam int unsigned POS_W  = $clog2(TAPS + 1)
) (
  input  logic [IDX_W-1:0] p_i,
  input  logic [LS_W-1:0]  lsum_first_i,
  input  logic [LS_W-1:0]  lsum_second_i,
  output logic [POS_W-1:0] pos_o,
  output trans_e           kind_o
);
  logic [POS_W-1:0] base;
  logic [LS_W:0]    sum;

  always_comb begin
    base   = POS_W'(p_i) * POS_W'(PIECE_W);
    sum    = (LS_W+1)'(lsum_first_i) + (LS_W+1)'(lsum_second_i);
    kind_o = trans_e'(lsum_first_i[LS_W-1]);
    if (kind_o == TR_FALL_10) pos_o = base + POS_W'(sum);
    else                      pos_o = base + POS_W'(2 * PIECE_W) - POS_W'(sum);
  end
endmodule
