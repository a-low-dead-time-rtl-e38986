// backend_stage_tb: drives one back-end stage (216 taps, 24-bit pieces)
// with local sums and a Sel array worked out in the testbench from random
// snapshots holding one or two transitions with bubbles. After one clock
// the stage must report the position of the first transition (reference:
// counting taps, see tdc_tb_pkg), its kind, the Sel array with the first
// set bit cleared, and the local sums unchanged. Snapshots without a
// transition must give found = 0.
module backend_stage_tb;
  import tdc_pkg::*;
  import tdc_tb_pkg::*;
  localparam int TAPS = 216, W = 24, NP = TAPS / W;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0][4:0] lsum_i, lsum_o;
  logic [NP-2:0] sel_i, sel_o;
  logic found;
  logic [7:0] pos;
  trans_e kind;
  int checks = 0, failures = 0;

  backend_stage #(.TAPS(TAPS), .PIECE_W(W)) dut (
    .clk, .rst_n, .lsum_i, .sel_i, .lsum_o, .sel_o, .found_o(found), .pos_o(pos), .kind_o(kind));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lsum_i = '0;
    sel_i  = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 800; i++) begin
      raw_t r;
      int c[$], h, e;
      bit lvl0;
      logic [NP-1:0] f;
      logic [NP-2:0] s, m;
      h    = $urandom_range(0, 7);
      lvl0 = 1'($urandom_range(0, 1));
      if (i % 10 == 0) c.delete();
      else rand_centres(1 + (i % 2), W, 7, TAPS - W - 7, c);
      r = make_pattern(TAPS, c, lvl0, h, W);
      for (int p = 0; p < NP; p++) begin
        lsum_i[p] = 5'(count_ones(r, p * W, p * W + W));
        f[p] = lsum_i[p] >= 16;
      end
      for (int p = 0; p < NP - 1; p++) s[p] = f[p+1] ^ f[p];
      sel_i = s;
      m = s;
      for (int p = 0; p < NP - 1; p++) if (s[p]) begin m[p] = 1'b0; break; end
      e = (c.size() > 0) ? zone_ref(r, TAPS, c, 0, lvl0, h) : 0;
      @(negedge clk);
      checks++;
      if (found != (c.size() > 0) || int'(pos) != e || sel_o != m || lsum_o != lsum_i ||
          (c.size() > 0 && kind != trans_e'(lvl0))) begin
        failures++;
        $display("FAIL i=%0d zones=%0d found=%b pos=%0d expected %0d sel_o=%b expected %b kind=%0d",
                 i, c.size(), found, pos, e, sel_o, m, kind);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
