// sel_priority_encoder: priority encoder of one back-end stage.
//
// Finds the lowest set bit of the Sel array (the transition nearest to the
// start of the delay line), returns its index on idx_o ("Encoded") and the
// Sel array with that bit cleared on masked_o ("Masked"), which the next
// stage searches for the next transition. found_o is low when no bit is set;
// idx_o is then 0 and masked_o equals sel_i.
//
// Combinational.
module sel_priority_encoder #(
  parameter int unsigned N      = 8,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]     sel_i,
  output logic             found_o,
  output logic [IDX_W-1:0] idx_o,
  output logic [N-1:0]     masked_o
);
  always_comb begin
    found_o  = 1'b0;
    idx_o    = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (sel_i[i]) begin
        found_o = 1'b1;
        idx_o   = IDX_W'(i);
      end
    end
    masked_o = sel_i;
    if (found_o) masked_o[idx_o] = 1'b0;
  end
endmodule
