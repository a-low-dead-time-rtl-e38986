// pre_encoded_cell_tb: checks the local sum of a 24-bit piece against an
// independent count of its ones, on all-zero, all-one, the two pieces of
// the worked examples (local sums 21 and 23) and 2000 random pieces. The
// flag (MSB) must be set exactly when the count is 16 or more.
module pre_encoded_cell_tb;
  localparam int W = 24;
  logic [W-1:0] piece;
  logic [4:0]   lsum;
  int checks = 0, failures = 0;

  pre_encoded_cell #(.PIECE_W(W)) dut (.piece_i(piece), .lsum_o(lsum));

  task automatic check(input logic [W-1:0] p);
    int n;
    piece = p;
    #1;
    n = 0;
    for (int i = 0; i < W; i++) n += int'(p[i]);
    checks++;
    if (int'(lsum) != n || lsum[4] != (n >= 16)) begin
      failures++;
      $display("FAIL piece=%h lsum=%0d expected %0d", p, lsum, n);
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
    check('1);
    // "111...101001" (tap 0 on the left): 18 ones then 1,0,1,0,0,1 -> 21
    check({1'b1, 1'b0, 1'b0, 1'b1, 1'b0, 1'b1, {18{1'b1}}});
    // "111...101": 21 ones then 1,0,1 -> 23
    check({1'b1, 1'b0, 1'b1, {21{1'b1}}});
    for (int i = 0; i < 2000; i++) check(W'({$urandom, $urandom}));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
