// sel_priority_encoder_tb: random and directed Sel arrays of 8 bits; the
// index must be that of the lowest set bit, the masked array must lack
// exactly that bit, and an empty array must give found = 0.
module sel_priority_encoder_tb;
  localparam int N = 8;
  logic [N-1:0] sel, masked;
  logic         found;
  logic [2:0]   idx;
  int checks = 0, failures = 0;

  sel_priority_encoder #(.N(N)) dut (.sel_i(sel), .found_o(found), .idx_o(idx), .masked_o(masked));

  task automatic check(input logic [N-1:0] s);
    int first;
    logic [N-1:0] m;
    sel = s;
    #1;
    first = -1;
    for (int i = N - 1; i >= 0; i--) if (s[i]) first = i;
    m = s;
    if (first >= 0) m[first] = 1'b0;
    checks++;
    if (found != (first >= 0) || (first >= 0 && int'(idx) != first) || masked != m) begin
      failures++;
      $display("FAIL sel=%b found=%b idx=%0d masked=%b", s, found, idx, masked);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check('0);
    check(8'b0000_0100);   // the Sel array of the worked examples: 0 0 1 0
    check(8'b1000_0000);
    check(8'b1010_0110);
    for (int i = 0; i < 1000; i++) check(N'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
