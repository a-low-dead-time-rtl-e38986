// pre_encoded_cell: local sum of one piece of tapped-delay-line raw data.
//
// A piece of PIECE_W bits (24 by default) is cut into groups of six bits.
// Each group goes through a 6-input LUT stage that returns its count of
// ones on 3 bits, and an adder tree sums the group counts into the local
// sum (5 bits for a 24-bit piece). This is the structure of the pre-encoded
// cell of the method: LUTs giving 3 bits each, then an adder tree. The MSB
// of the local sum is the flag of the piece; for 24-bit pieces it is set
// when the piece holds 16 or more ones.
//
// Combinational; the caller registers the result. PIECE_W must be a
// multiple of 6 (a design choice matching the 6-input LUTs).
module pre_encoded_cell #(
  parameter int unsigned PIECE_W = 24,
  localparam int unsigned LS_W   = $clog2(PIECE_W + 1)
) (
  input  logic [PIECE_W-1:0] piece_i,
  output logic [LS_W-1:0]    lsum_o
);
  localparam int unsigned NGRP = PIECE_W / 6;

  logic [NGRP-1:0][2:0] grp_cnt;

  for (genvar g = 0; g < NGRP; g++) begin : g_lut
    lut_popcount6 u_lut (.bits_i(piece_i[6*g +: 6]), .count_o(grp_cnt[g]));
  end

  // Adder tree over the group counts.
  always_comb begin
    lsum_o = '0;
    for (int g = 0; g < NGRP; g++) lsum_o = lsum_o + LS_W'(grp_cnt[g]);
  end

  initial begin
    assert (PIECE_W % 6 == 0)
      else $error("pre_encoded_cell: PIECE_W must be a multiple of 6");
  end
endmodule
