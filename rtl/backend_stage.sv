// backend_stage: one stage of the back-end encoder.
//
// Inputs are the buffered local sums of all pieces (the stage's data
// buffer contents) and the Sel array still to be searched. The priority
// encoder picks the first set Sel bit P; two multiplexers take the local
// sums of pieces P and P+1 to the M&A block, which computes the transition
// position. The stage registers the position, its kind and a found flag,
// and passes the local sums (next stage's data buffer) and the masked Sel
// array on to the next stage.
//
// Timing: one clock cycle from the inputs to every output. Accepts new data
// on every clock. With no Sel bit set, found_o is 0 and pos_o is 0.
//
// The blocks and their wiring (data buffer, priority encoder with Encoded
// and Masked outputs, multiplexer, M&A block) follow the published method;
// where the registers sit inside a stage is this design's choice.
module backend_stage
  import tdc_pkg::*;
#(
  parameter int unsigned TAPS    = 216,
  parameter int unsigned PIECE_W = 24,
  localparam int unsigned NP     = TAPS / PIECE_W,
  localparam int unsigned IDX_W  = $clog2(NP - 1 > 1 ? NP - 1 : 2),
  localparam int unsigned LS_W   = $clog2(PIECE_W + 1),
  localparam int unsigned POS_W  = $clog2(TAPS + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NP-1:0][LS_W-1:0] lsum_i,
  input  logic [NP-2:0]           sel_i,
  output logic [NP-1:0][LS_W-1:0] lsum_o,
  output logic [NP-2:0]           sel_o,
  output logic                    found_o,
  output logic [POS_W-1:0]        pos_o,
  output trans_e                  kind_o
);
  logic             found_c;
  logic [IDX_W-1:0] idx_c;
  logic [NP-2:0]    masked_c;
  logic [LS_W-1:0]  ls_first, ls_second;
  logic [POS_W-1:0] pos_c;
  trans_e           kind_c;

  sel_priority_encoder #(.N(NP - 1)) u_pe (
    .sel_i   (sel_i),
    .found_o (found_c),
    .idx_o   (idx_c),
    .masked_o(masked_c)
  );

  // Multiplexers: local sums of the two selected pieces. idx_c <= NP-2.
  always_comb begin
    ls_first  = '0;
    ls_second = '0;
    for (int p = 0; p < NP - 1; p++) begin
      if (IDX_W'(p) == idx_c) begin
        ls_first  = lsum_i[p];
        ls_second = lsum_i[p+1];
      end
    end
  end

  ma_block #(.TAPS(TAPS), .PIECE_W(PIECE_W)) u_ma (
    .p_i          (idx_c),
    .lsum_first_i (ls_first),
    .lsum_second_i(ls_second),
    .pos_o        (pos_c),
    .kind_o       (kind_c)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lsum_o  <= '0;
      sel_o   <= '0;
      found_o <= 1'b0;
      pos_o   <= '0;
      kind_o  <= TR_RISE_01;
    end else begin
      lsum_o  <= lsum_i;
      sel_o   <= masked_c;
      found_o <= found_c;
      pos_o   <= found_c ? pos_c : '0;
      kind_o  <= kind_c;
    end
  end
endmodule
