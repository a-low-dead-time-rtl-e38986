// tdc_cable_delay_tb: the two measurements used to evaluate a TDL TDC, the
// cable-delay (time-interval) test and the code-density test, for each of
// the four channel types. Each runs in a tdc_pair_bench: two channels of the
// same type, an ideal delay line of equal taps in front of each, a 400 MHz
// clock, 200,000 hits at random phase, channel B seeing each hit 3.1 ns
// after channel A (a delay of this test's own).
//
// Tap delays are the average bin sizes measured on the real lines, times
// the number of edges: 14.8 ps (normal, 216 taps), 14.6 ps (half-length,
// 120 taps), 2 x 7.4 ps (double-edge wave union, 288 taps) and 4 x 3.8 ps
// (four-edge wave union, 360 taps). The normal pair runs at the channel's
// default parameters.
//
// With equal taps the only error left is quantisation: each interval must
// be within one bin (tap / edges) of 3.1 ns, and the histogram of the codes
// must be flat over one clock period. Each bench prints the number of fine
// codes seen, the average bin size and the RMS interval error.
module tdc_cable_delay_tb;
  import tdc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic done_n, done_h, done_d, done_f;
  int ch_n, ch_h, ch_d, ch_f, fl_n, fl_h, fl_d, fl_f;

  tdc_pair_bench #(.TAPS(216), .EDGES(1), .MODE(MODE_NORMAL), .TAU(148), .NAME("normal 216"))
    u_n (.clk, .rst_n, .done(done_n), .checks(ch_n), .failures(fl_n));
  tdc_pair_bench #(.TAPS(120), .EDGES(1), .MODE(MODE_HALF_LENGTH), .TAU(146), .NAME("half-length 120"))
    u_h (.clk, .rst_n, .done(done_h), .checks(ch_h), .failures(fl_h));
  tdc_pair_bench #(.TAPS(288), .EDGES(2), .MODE(MODE_WAVE_UNION), .TAU(148), .NAME("double-edge 288"))
    u_d (.clk, .rst_n, .done(done_d), .checks(ch_d), .failures(fl_d));
  tdc_pair_bench #(.TAPS(360), .EDGES(4), .MODE(MODE_WAVE_UNION), .TAU(152), .NAME("four-edge 360"))
    u_f (.clk, .rst_n, .done(done_f), .checks(ch_f), .failures(fl_f));

  initial begin
    #40000000;
    $display("TB_RESULT checks=%0d failures=%0d", ch_n + ch_h + ch_d + ch_f, fl_n + fl_h + fl_d + fl_f + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done_n && done_h && done_d && done_f);
    $display("TB_RESULT checks=%0d failures=%0d", ch_n + ch_h + ch_d + ch_f, fl_n + fl_h + fl_d + fl_f);
    $finish;
  end
endmodule
