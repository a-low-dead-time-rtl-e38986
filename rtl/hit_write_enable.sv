// hit_write_enable: FIFO write enable from the encoder flags of two
// adjacent clock periods.
//
// A waveform that is still travelling in the delay line can show up in two
// consecutive samples. The write enable is therefore raised only in a
// period whose encoder output is valid while that of the period before was
// not: we_o = valid_i AND NOT valid(previous period). One hit is written
// once, and after a write the channel cannot write again in the next
// period, which makes the dead time of the whole channel two clock periods
// (the encoder alone has one).
//
// Combinational from valid_i to we_o, plus one flip-flop of history.
// That the enable is built from two adjacent periods, and the resulting
// two-period dead time, follow the published method; the exact rule is
// this design's choice.
module hit_write_enable (
  input  logic clk,
  input  logic rst_n,
  input  logic valid_i,
  output logic we_o
);
  logic valid_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_q <= 1'b0;
    else        valid_q <= valid_i;
  end

  assign we_o = valid_i && !valid_q;
endmodule
