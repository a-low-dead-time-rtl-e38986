// tdl_sampler: the sampling D flip-flops of the delay line.
//
// Every tap of the tapped delay line is captured by one flip-flop on the
// rising edge of the system clock; the registered word is the raw data of
// the TDC for that clock period. The taps are asynchronous to the clock,
// so the flip-flops can go metastable: this is one of the sources of the
// "bubbles" the encoder tolerates. A single rank of flip-flops, as in the
// basic TDL TDC architecture. Reset clears the raw data.
module tdl_sampler #(
  parameter int unsigned TAPS = 216
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [TAPS-1:0] taps_i,
  output logic [TAPS-1:0] raw_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) raw_o <= '0;
    else        raw_o <= taps_i;
  end
endmodule
