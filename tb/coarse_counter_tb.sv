// coarse_counter_tb: an 8-bit counter must hold 0 in reset, then advance
// by one per clock and wrap from 255 to 0; it is compared with a count of
// clock edges kept by the testbench over 600 clocks.
module coarse_counter_tb;
  logic clk = 0, rst_n = 0;
  logic [7:0] cnt;
  int checks = 0, failures = 0;
  int edges = 0;

  coarse_counter #(.WIDTH(8)) dut (.clk, .rst_n, .count_o(cnt));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    checks++;
    if (cnt != 0) begin failures++; $display("FAIL reset %0d", cnt); end
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      edges++;
      checks++;
      if (int'(cnt) != edges % 256) begin failures++; $display("FAIL %0d: %0d", edges, cnt); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
