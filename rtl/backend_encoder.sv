// backend_encoder: second and final steps of the encoding method.
//
// EDGES back-end stages are cascaded: stage k finds the k-th transition of
// the raw data (counted from tap 0) in the Sel array its predecessor has
// masked, and computes its position. The results of the earlier stages are
// delayed so that all EDGES results of one sample leave together; a final
// register then forms the fine code according to MODE:
//   MODE_NORMAL      : fine = position of the 1-0 transition; valid (the
//                      en-flag) when stage 1 found a 1-0 transition.
//   MODE_HALF_LENGTH : fine = {kind, position} of the first transition,
//                      kind 1 for 1-0 and 0 for 0-1; valid when found.
//   MODE_WAVE_UNION  : fine = sum of the EDGES positions; valid only when
//                      all EDGES stages found a transition.
// edges_o counts the transitions found (0..EDGES) in every mode.
//
// Timing: EDGES+1 clock cycles from lsum_i/sel_i to the outputs; a new
// sample is accepted on every clock, so the encoder's dead time is one
// clock period.
//
// The cascade, the per-mode arithmetic and the rule that a wave-union
// result is valid only when every edge was found follow the published
// method. The alignment registers, the rejection of 0-1 snapshots in
// normal mode and the 10-bit (instead of 9-bit) double-edge code, wide
// enough for 2 x 288, are this design's choices.
module backend_encoder
  import tdc_pkg::*;
#(
  parameter int unsigned TAPS    = 216,
  parameter int unsigned PIECE_W = 24,
  parameter int unsigned EDGES   = 1,
  parameter tdc_mode_e   MODE    = MODE_NORMAL,
  localparam int unsigned NP     = TAPS / PIECE_W,
  localparam int unsigned LS_W   = $clog2(PIECE_W + 1),
  localparam int unsigned POS_W  = $clog2(TAPS + 1),
  localparam int unsigned FINE_W = fine_width(MODE, TAPS, EDGES),
  localparam int unsigned CNT_W  = $clog2(EDGES + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NP-1:0][LS_W-1:0]     lsum_i,
  input  logic [NP-2:0]               sel_i,
  output logic                        valid_o,
  output logic [FINE_W-1:0]           fine_o,
  output logic [CNT_W-1:0]            edges_o,
  output logic [EDGES-1:0][POS_W-1:0] pos_o,
  output trans_e [EDGES-1:0]          kind_o
);
  // Stage chain; index 0 is the pre-encoder output.
  logic [EDGES:0][NP-1:0][LS_W-1:0] ls_ch;
  logic [EDGES:0][NP-2:0]           sel_ch;
  logic [EDGES-1:0]                 st_found;
  logic [EDGES-1:0][POS_W-1:0]      st_pos;
  trans_e [EDGES-1:0]               st_kind;

  assign ls_ch[0]  = lsum_i;
  assign sel_ch[0] = sel_i;

  // Aligned results: stage k's result delayed by EDGES-1-k cycles.
  logic [EDGES-1:0]            al_found;
  logic [EDGES-1:0][POS_W-1:0] al_pos;
  trans_e [EDGES-1:0]          al_kind;

  for (genvar k = 0; k < EDGES; k++) begin : g_stage
    backend_stage #(.TAPS(TAPS), .PIECE_W(PIECE_W)) u_stage (
      .clk    (clk),
      .rst_n  (rst_n),
      .lsum_i (ls_ch[k]),
      .sel_i  (sel_ch[k]),
      .lsum_o (ls_ch[k+1]),
      .sel_o  (sel_ch[k+1]),
      .found_o(st_found[k]),
      .pos_o  (st_pos[k]),
      .kind_o (st_kind[k])
    );

    localparam int unsigned DLY = EDGES - 1 - k;
    if (DLY == 0) begin : g_nodly
      assign al_found[k] = st_found[k];
      assign al_pos[k]   = st_pos[k];
      assign al_kind[k]  = st_kind[k];
    end else begin : g_dly
      logic [DLY-1:0]            d_found;
      logic [DLY-1:0][POS_W-1:0] d_pos;
      trans_e [DLY-1:0]          d_kind;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          d_found <= '0;
          d_pos   <= '0;
          d_kind  <= '{default: TR_RISE_01};
        end else begin
          d_found[0] <= st_found[k];
          d_pos[0]   <= st_pos[k];
          d_kind[0]  <= st_kind[k];
          for (int i = 1; i < DLY; i++) begin
            d_found[i] <= d_found[i-1];
            d_pos[i]   <= d_pos[i-1];
            d_kind[i]  <= d_kind[i-1];
          end
        end
      end
      assign al_found[k] = d_found[DLY-1];
      assign al_pos[k]   = d_pos[DLY-1];
      assign al_kind[k]  = d_kind[DLY-1];
    end
  end

  // Final adders and output register.
  logic              valid_c;
  logic [FINE_W-1:0] fine_c;
  logic [CNT_W-1:0]  edges_c;

  always_comb begin
    edges_c = '0;
    for (int k = 0; k < EDGES; k++) edges_c = edges_c + CNT_W'(al_found[k]);
    case (MODE)
      MODE_HALF_LENGTH: begin
        valid_c = al_found[0];
        fine_c  = FINE_W'({al_kind[0], al_pos[0]});
      end
      MODE_WAVE_UNION: begin
        valid_c = &al_found;
        fine_c  = '0;
        for (int k = 0; k < EDGES; k++) fine_c = fine_c + FINE_W'(al_pos[k]);
      end
      default: begin
        valid_c = al_found[0] && (al_kind[0] == TR_FALL_10);
        fine_c  = FINE_W'(al_pos[0]);
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      fine_o  <= '0;
      edges_o <= '0;
      pos_o   <= '0;
      kind_o  <= '{default: TR_RISE_01};
    end else begin
      valid_o <= valid_c;
      fine_o  <= valid_c ? fine_c : '0;
      edges_o <= edges_c;
      pos_o   <= al_pos;
      kind_o  <= al_kind;
    end
  end

  initial begin
    assert (EDGES >= 1 && (MODE == MODE_WAVE_UNION || EDGES == 1))
      else $error("backend_encoder: only the wave-union mode uses more than one stage");
  end
endmodule
