// pre_encoder: first step of the encoding method.
//
// The sampled raw data of the delay line (TAPS bits, tap 0 being the first
// cell after the launcher) is divided into NP = TAPS/PIECE_W pieces, piece i
// holding taps i*PIECE_W .. i*PIECE_W+PIECE_W-1. A pre-encoded cell counts
// the ones of each piece (local sum). The flag of a piece is the MSB of its
// local sum, and Sel[i] = Flag[i+1] XOR Flag[i] marks the pair of adjacent
// pieces i, i+1 in which a transition lies. Local sums and the Sel array are
// buffered in flip-flops before they go to the back-end.
//
// Timing: one clock cycle from raw_i to lsum_o/sel_o. A new raw word is
// accepted on every clock (no dead time). Reset clears the buffer.
module pre_encoder #(
  parameter int unsigned TAPS    = 216,
  parameter int unsigned PIECE_W = 24,
  localparam int unsigned NP     = TAPS / PIECE_W,
  localparam int unsigned LS_W   = $clog2(PIECE_W + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [TAPS-1:0]           raw_i,
  output logic [NP-1:0][LS_W-1:0]   lsum_o,
  output logic [NP-2:0]             sel_o
);
  logic [NP-1:0][LS_W-1:0] lsum_c;
  logic [NP-1:0]           flag_c;
  logic [NP-2:0]           sel_c;

  for (genvar p = 0; p < NP; p++) begin : g_cell
    pre_encoded_cell #(.PIECE_W(PIECE_W)) u_cell (
      .piece_i(raw_i[p*PIECE_W +: PIECE_W]),
      .lsum_o (lsum_c[p])
    );
    assign flag_c[p] = lsum_c[p][LS_W-1];
  end

  assign sel_c = flag_c[NP-1:1] ^ flag_c[NP-2:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lsum_o <= '0;
      sel_o  <= '0;
    end else begin
      lsum_o <= lsum_c;
      sel_o  <= sel_c;
    end
  end

  initial begin
    assert (TAPS % PIECE_W == 0 && NP >= 2)
      else $error("pre_encoder: TAPS must be at least two whole pieces");
  end
endmodule
