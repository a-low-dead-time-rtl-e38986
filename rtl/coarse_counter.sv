// coarse_counter: free-running coarse time counter.
//
// Counts system clock periods; wraps at 2**WIDTH. The channel combines the
// count with the fine code of the delay line to form a timestamp. The
// width is a free choice (24 bits here: 41.9 ms of range at 400 MHz).
// Reset clears the count; it then advances by one on every clock.
// The counter on the system clock is part of the published TDC; its width
// and reset are this design's choices.
module coarse_counter #(
  parameter int unsigned WIDTH = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic [WIDTH-1:0] count_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) count_o <= '0;
    else        count_o <= count_o + 1'b1;
  end
endmodule
