// hit_write_enable_tb: random valid sequences (including runs of 1, 2 and
// more periods); the write enable must be high exactly in the periods with
// valid high that follow a period with valid low, so a hit seen in two
// adjacent samples is written once.
module hit_write_enable_tb;
  logic clk = 0, rst_n = 0;
  logic valid, we;
  bit   prev;
  int checks = 0, failures = 0, writes = 0, suppressed = 0;

  hit_write_enable dut (.clk, .rst_n, .valid_i(valid), .we_o(we));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 0;
    prev  = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      prev  = valid;
      valid = ($urandom_range(0, 2) == 0);
      #1;
      checks++;
      if (we != (valid && !prev)) begin failures++; $display("FAIL i=%0d", i); end
      if (we) writes++;
      if (valid && prev) suppressed++;
    end
    checks++;
    if (writes == 0 || suppressed == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
