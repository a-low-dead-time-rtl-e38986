// ma_block_tb: every piece index and every pair of local sums of a 216-tap
// line with 24-bit pieces. The expected position is worked out by counting:
// for a 1-0 transition the ones ahead of it are P full pieces plus the two
// local sums; for a 0-1 transition the zeros ahead of it are P full pieces
// plus the zeros of the two selected pieces. Also checks the two worked
// examples of the method (results 69 and 72).
module ma_block_tb;
  import tdc_pkg::*;
  localparam int TAPS = 216, W = 24;
  logic [2:0] p;
  logic [4:0] a, b;
  logic [7:0] pos;
  trans_e     kind;
  int checks = 0, failures = 0;

  ma_block #(.TAPS(TAPS), .PIECE_W(W)) dut (
    .p_i(p), .lsum_first_i(a), .lsum_second_i(b), .pos_o(pos), .kind_o(kind));

  task automatic check(input int pi, input int ai, input int bi, input int expect_pos);
    bit fall;
    p = 3'(pi); a = 5'(ai); b = 5'(bi);
    #1;
    fall = (ai >= 16);
    checks++;
    if (int'(pos) != expect_pos || (kind == TR_FALL_10) != fall) begin
      failures++;
      $display("FAIL P=%0d sums=%0d,%0d pos=%0d expected %0d kind=%0d", pi, ai, bi, pos, expect_pos, kind);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(2, 21, 0, 69);
    check(2, 23, 1, 72);
    for (int pi = 0; pi < 8; pi++)
      for (int ai = 0; ai <= W; ai++)
        for (int bi = 0; bi <= W; bi++) begin
          int e;
          if (ai >= 16 && bi < 16) e = pi * W + ai + bi;                       // ones ahead
          else if (ai < 16 && bi >= 16) e = pi * W + (W - ai) + (W - bi);      // zeros ahead
          else continue;
          if (e > TAPS) continue;
          check(pi, ai, bi, e);
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
