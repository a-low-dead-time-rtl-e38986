// tdl_sampler_tb: the tap word must appear on the output only after a
// rising clock edge: it is changed between edges and the output must still
// show the word present at the previous edge. Reset must clear the output.
module tdl_sampler_tb;
  localparam int TAPS = 216;
  logic clk = 0, rst_n = 1;
  logic [TAPS-1:0] taps, raw, at_edge;
  int checks = 0, failures = 0;

  tdl_sampler #(.TAPS(TAPS)) dut (.clk, .rst_n, .taps_i(taps), .raw_o(raw));

  always #5 clk = ~clk;

  function automatic logic [TAPS-1:0] rnd();
    return TAPS'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    taps = rnd();
    #1 rst_n = 0;          // asynchronous reset, between clock edges
    #1;
    checks++;
    if (raw != '0) begin failures++; $display("FAIL reset"); end
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      taps = rnd();
      @(posedge clk);
      at_edge = taps;
      #2 taps = rnd();      // changes after the edge must not pass through
      #1;
      checks++;
      if (raw != at_edge) begin failures++; $display("FAIL word %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
