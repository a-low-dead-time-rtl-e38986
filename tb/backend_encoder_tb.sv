// backend_encoder_tb: two back-end encoders fed a new sample on every clock.
//  - normal TDL configuration (216 taps, one stage): 1-0 edges with
//    bubbles must give valid and the position; empty, full and 0-1
//    snapshots must give no valid. Clean edges at 16 and 207 taps are
//    found, edges at 15 and 208 are not (no flag change between pieces).
//    A 16-tap-wide blur just after a clean piece (the worst case of bubble
//    depth) must still give the number of ones in the line.
//  - four-edge wave-union configuration (360 taps, four stages): four
//    transitions must give valid, edges = 4 and the sum of the four
//    positions; two transitions must give no valid and edges = 2.
// Results are expected exactly EDGES+1 clocks after the input, one per
// clock (encoder dead time of one period). Local sums and Sel arrays are
// computed in the testbench by counting.
module backend_encoder_tb;
  import tdc_pkg::*;
  import tdc_tb_pkg::*;
  localparam int W = 24;
  localparam int TN = 216, NN = TN / W;
  localparam int TW = 360, NW = TW / W;
  localparam int N_IN = 500;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, n_deep = 0;

  logic [NN-1:0][4:0] ls_n;  logic [NN-2:0] sel_n;
  logic [NW-1:0][4:0] ls_w;  logic [NW-2:0] sel_w;
  logic v_n, v_w;
  logic [7:0] fine_n;  logic [10:0] fine_w;
  logic [0:0] edges_n; logic [2:0] edges_w;
  logic [0:0][7:0] pos_n; logic [3:0][8:0] pos_w;
  trans_e [0:0] kind_n; trans_e [3:0] kind_w;

  backend_encoder #(.TAPS(TN), .PIECE_W(W)) u_n (
    .clk, .rst_n, .lsum_i(ls_n), .sel_i(sel_n), .valid_o(v_n), .fine_o(fine_n),
    .edges_o(edges_n), .pos_o(pos_n), .kind_o(kind_n));
  backend_encoder #(.TAPS(TW), .PIECE_W(W), .EDGES(4), .MODE(MODE_WAVE_UNION)) u_w (
    .clk, .rst_n, .lsum_i(ls_w), .sel_i(sel_w), .valid_o(v_w), .fine_o(fine_w),
    .edges_o(edges_w), .pos_o(pos_w), .kind_o(kind_w));

  always #5 clk = ~clk;

  int  exp_n_fine [N_IN]; bit exp_n_v [N_IN];
  int  exp_w_fine [N_IN]; bit exp_w_v [N_IN]; int exp_w_e [N_IN];

  function automatic void encode(input raw_t r, input int taps, output logic [14:0][4:0] ls,
                                 output logic [13:0] s);
    logic [14:0] f;
    ls = '0; s = '0; f = '0;
    for (int p = 0; p < taps / W; p++) begin
      ls[p] = 5'(count_ones(r, p * W, p * W + W));
      f[p]  = ls[p] >= 16;
    end
    for (int p = 0; p < taps / W - 1; p++) s[p] = f[p+1] ^ f[p];
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ls_n = '0; sel_n = '0; ls_w = '0; sel_w = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N_IN + 5; i++) begin
      @(negedge clk);
      // check outputs for inputs driven EDGES+1 clocks ago
      if (i >= 2 && i - 2 < N_IN) begin
        int j;
        j = i - 2;
        checks++;
        if (v_n != exp_n_v[j] || (exp_n_v[j] && int'(fine_n) != exp_n_fine[j])) begin
          failures++;
          $display("FAIL normal j=%0d v=%b fine=%0d expected v=%b fine=%0d", j, v_n, fine_n, exp_n_v[j], exp_n_fine[j]);
        end
      end
      if (i >= 5 && i - 5 < N_IN) begin
        int j;
        j = i - 5;
        checks++;
        if (v_w != exp_w_v[j] || int'(edges_w) != exp_w_e[j] || (exp_w_v[j] && int'(fine_w) != exp_w_fine[j])) begin
          failures++;
          $display("FAIL wave j=%0d v=%b edges=%0d fine=%0d expected v=%b edges=%0d fine=%0d",
                   j, v_w, edges_w, fine_w, exp_w_v[j], exp_w_e[j], exp_w_fine[j]);
        end
      end
      if (i < N_IN) begin
        raw_t r; int c[$]; int h; logic [14:0][4:0] ls; logic [13:0] s;
        // normal configuration
        h = $urandom_range(0, 7);
        // clean edges at the ends of the detectable range 16..TAPS-9
        if (i == 9 || i == 10 || i == 11 || i == 12) begin
          int e;
          e = (i == 9) ? 15 : (i == 10) ? 16 : (i == 11) ? TN - 9 : TN - 8;
          r = raw_t'({TN{1'b1}}) & ~(raw_t'({TN{1'b1}}) << e);
          exp_n_v[i] = (i == 10 || i == 11);
          exp_n_fine[i] = e;
        end else
        case (i % 8)
          0: begin r = '0; exp_n_v[i] = 0; end
          1: begin r = raw_t'({TN{1'b1}}); exp_n_v[i] = 0; end
          2: begin rand_centres(1, W, 7, TN - W - 7, c); r = make_pattern(TN, c, 1'b0, h, W); exp_n_v[i] = 0; end
          3: begin
            // worst case for bubbles: a 16-tap blur at the start of piece k,
            // the piece before it clean
            int k;
            k = $urandom_range(1, NN - 2);
            r = raw_t'({TN{1'b1}}) & ~(raw_t'({TN{1'b1}}) << (k * W));
            for (int b = 0; b < 16; b++) r[k * W + b] = 1'($urandom_range(0, 1));
            exp_n_v[i] = 1;
            exp_n_fine[i] = count_ones(r, 0, TN);
            n_deep++;
          end
          default: begin
            rand_centres(1, W, 7, TN - W - 7, c);
            r = make_pattern(TN, c, 1'b1, h, W);
            exp_n_v[i] = 1;
            exp_n_fine[i] = zone_ref(r, TN, c, 0, 1'b1, h);
          end
        endcase
        encode(r, TN, ls, s);
        ls_n = ls[NN-1:0]; sel_n = s[NN-2:0];
        // four-edge wave-union configuration
        h = $urandom_range(0, 7);
        if (i % 6 == 0) begin
          rand_centres(2, W, 7, TW - W - 7, c);
          r = make_pattern(TW, c, 1'b0, h, W);
          exp_w_v[i] = 0; exp_w_e[i] = 2;
        end else begin
          rand_centres(4, W, 7, TW - W - 7, c);
          r = make_pattern(TW, c, 1'b0, h, W);
          exp_w_v[i] = 1; exp_w_e[i] = 4;
          exp_w_fine[i] = 0;
          for (int k = 0; k < 4; k++) exp_w_fine[i] += zone_ref(r, TW, c, k, 1'b0, h);
        end
        encode(r, TW, ls, s);
        ls_w = ls[NW-1:0]; sel_w = s[NW-2:0];
      end
    end
    checks++;
    if (n_deep == 0) begin failures++; $display("FAIL no deep-bubble case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
