// pre_encoder_tb: a new raw word of 216 taps on every clock (edge patterns
// with bubbles and fully random words). One clock later the local sums must
// equal the ones counted in each 24-tap piece and Sel[i] must equal
// (sum[i+1] >= 16) XOR (sum[i] >= 16). Also checks that the output holds
// the previous word, i.e. the one-cycle latency.
module pre_encoder_tb;
  import tdc_tb_pkg::*;
  localparam int TAPS = 216, W = 24, NP = TAPS / W;
  logic clk = 0, rst_n = 0;
  logic [TAPS-1:0] raw;
  logic [NP-1:0][4:0] lsum;
  logic [NP-2:0] sel;
  raw_t hist [$];
  int checks = 0, failures = 0;

  pre_encoder #(.TAPS(TAPS), .PIECE_W(W)) dut (.clk, .rst_n, .raw_i(raw), .lsum_o(lsum), .sel_o(sel));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raw = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      raw_t r;
      int   c[$];
      @(negedge clk);
      // check the word driven one clock ago
      if (hist.size() > 0) begin
        raw_t q;
        logic [NP-1:0] f;
        q = hist.pop_front();
        for (int p = 0; p < NP; p++) begin
          int n;
          n = count_ones(q, p * W, p * W + W);
          f[p] = (n >= 16);
          checks++;
          if (int'(lsum[p]) != n) begin
            failures++;
            $display("FAIL word %0d piece %0d lsum=%0d expected %0d", i, p, lsum[p], n);
          end
        end
        for (int p = 0; p < NP - 1; p++) begin
          checks++;
          if (sel[p] != (f[p+1] ^ f[p])) begin
            failures++;
            $display("FAIL word %0d sel[%0d]=%b", i, p, sel[p]);
          end
        end
      end
      if (i % 3 == 0) r = raw_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      else begin
        rand_centres(1 + (i % 2), W, 7, TAPS - W - 7, c);
        r = make_pattern(TAPS, c, 1'(i % 5 == 0), $urandom_range(0, 7), W);
      end
      raw = r[TAPS-1:0];
      hist.push_back(r & raw_t'({TAPS{1'b1}}));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
