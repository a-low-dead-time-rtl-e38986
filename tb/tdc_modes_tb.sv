// tdc_modes_tb: the three other channel configurations of the design, side
// by side, each fed a new snapshot on every clock:
//   half-length delay line TDC : 120 taps, first transition, 8-bit code
//                                {kind, position}; snapshots 111..000,
//                                000..111 and 000..111..000 (square pulse)
//   double-edge wave union TDC : 288 taps, 2 stages, sum of 2 positions
//   four-edge wave union TDC   : 360 taps, 4 stages, sum of 4 positions
// Every output is compared, at the channel latency (EDGES + 2 clocks after
// sampling), with positions counted from the taps. Wave-union snapshots
// with too few transitions must give no valid and the number found. Each
// snapshot kind must have occurred.
module tdc_modes_tb;
  import tdc_pkg::*;
  import tdc_tb_pkg::*;
  localparam int W = 24, N = 1500;
  localparam int TH = 120, TD = 288, TF = 360;

  logic clk = 0, rst_n = 0;
  logic [TH-1:0] taps_h; logic [TD-1:0] taps_d; logic [TF-1:0] taps_f;
  logic v_h, v_d, v_f, we_h, we_d, we_f;
  logic [7:0] fine_h; logic [9:0] fine_d; logic [10:0] fine_f;
  logic [0:0] e_h; logic [1:0] e_d; logic [2:0] e_f;
  logic [23:0] co_h, co_d, co_f;
  logic [31:0] ts_h; logic [33:0] ts_d; logic [34:0] ts_f;
  logic em_h, em_d, em_f, fu_h, fu_d, fu_f;
  logic [15:0] dr_h, dr_d, dr_f;

  tdl_tdc_channel #(.TAPS(TH), .MODE(MODE_HALF_LENGTH)) u_h (
    .clk, .rst_n, .taps_i(taps_h), .fine_valid_o(v_h), .fine_o(fine_h), .edges_o(e_h),
    .coarse_o(co_h), .wr_en_o(we_h), .rd_en_i(1'b1), .ts_o(ts_h), .ts_empty_o(em_h),
    .ts_full_o(fu_h), .ts_drop_cnt_o(dr_h));
  tdl_tdc_channel #(.TAPS(TD), .EDGES(2), .MODE(MODE_WAVE_UNION)) u_d (
    .clk, .rst_n, .taps_i(taps_d), .fine_valid_o(v_d), .fine_o(fine_d), .edges_o(e_d),
    .coarse_o(co_d), .wr_en_o(we_d), .rd_en_i(1'b1), .ts_o(ts_d), .ts_empty_o(em_d),
    .ts_full_o(fu_d), .ts_drop_cnt_o(dr_d));
  tdl_tdc_channel #(.TAPS(TF), .EDGES(4), .MODE(MODE_WAVE_UNION)) u_f (
    .clk, .rst_n, .taps_i(taps_f), .fine_valid_o(v_f), .fine_o(fine_f), .edges_o(e_f),
    .coarse_o(co_f), .wr_en_o(we_f), .rd_en_i(1'b1), .ts_o(ts_f), .ts_empty_o(em_f),
    .ts_full_o(fu_f), .ts_drop_cnt_o(dr_f));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_h10 = 0, n_h01 = 0, n_hpulse = 0, n_d_ok = 0, n_d_short = 0, n_f_ok = 0, n_f_short = 0;
  bit xv_h [N]; int xf_h [N];
  bit xv_d [N]; int xf_d [N]; int xe_d [N];
  bit xv_f [N]; int xf_f [N]; int xe_f [N];
  bit pv_h, pv_d, pv_f;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string s);
    failures++;
    $display("FAIL %s", s);
  endtask

  initial begin
    taps_h = '0; taps_d = '0; taps_f = '0;
    pv_h = 0; pv_d = 0; pv_f = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N + 8; i++) begin
      @(negedge clk);
      if (i >= 4 && i - 4 < N) begin
        int j;
        j = i - 4;
        checks++;
        if (v_h != xv_h[j] || (xv_h[j] && int'(fine_h) != xf_h[j]) || we_h != (xv_h[j] && !pv_h))
          fail($sformatf("half j=%0d v=%b code=%0d/%0d expected v=%b code=%0d/%0d",
                         j, v_h, fine_h[7], fine_h[6:0], xv_h[j], xf_h[j] >> 7, xf_h[j] % 128));
        pv_h = xv_h[j];
      end
      if (i >= 5 && i - 5 < N) begin
        int j;
        j = i - 5;
        checks++;
        if (v_d != xv_d[j] || int'(e_d) != xe_d[j] || (xv_d[j] && int'(fine_d) != xf_d[j]) ||
            we_d != (xv_d[j] && !pv_d))
          fail($sformatf("double j=%0d v=%b edges=%0d fine=%0d expected %b %0d %0d",
                         j, v_d, e_d, fine_d, xv_d[j], xe_d[j], xf_d[j]));
        pv_d = xv_d[j];
      end
      if (i >= 7 && i - 7 < N) begin
        int j;
        j = i - 7;
        checks++;
        if (v_f != xv_f[j] || int'(e_f) != xe_f[j] || (xv_f[j] && int'(fine_f) != xf_f[j]) ||
            we_f != (xv_f[j] && !pv_f))
          fail($sformatf("four j=%0d v=%b edges=%0d fine=%0d expected %b %0d %0d",
                         j, v_f, e_f, fine_f, xv_f[j], xe_f[j], xf_f[j]));
        pv_f = xv_f[j];
      end
      if (i < N) begin
        raw_t r;
        int c[$], h, kind;
        // ---- half-length line
        h = $urandom_range(0, 7);
        kind = $urandom_range(0, 4);
        xv_h[i] = 1;
        case (kind)
          0: begin r = '0; xv_h[i] = 0; end
          1: begin rand_centres(1, W, 7, TH - W - 7, c); r = make_pattern(TH, c, 1'b1, h, W);
                   xf_h[i] = 128 + zone_ref(r, TH, c, 0, 1'b1, h); n_h10++; end
          2: begin rand_centres(1, W, 7, TH - W - 7, c); r = make_pattern(TH, c, 1'b0, h, W);
                   xf_h[i] = zone_ref(r, TH, c, 0, 1'b0, h); n_h01++; end
          default: begin
                   rand_centres(2, W, 7, TH - 7, c); r = make_pattern(TH, c, 1'b0, h, W);
                   xf_h[i] = zone_ref(r, TH, c, 0, 1'b0, h); n_hpulse++; end
        endcase
        taps_h = r[TH-1:0];
        // ---- double-edge wave union
        h = $urandom_range(0, 7);
        if ($urandom_range(0, 4) == 0) begin
          rand_centres(1, W, 7, TD - W - 7, c); r = make_pattern(TD, c, 1'b0, h, W);
          xv_d[i] = 0; xe_d[i] = 1; n_d_short++;
        end else begin
          rand_centres(2, W, 7, TD - W - 7, c); r = make_pattern(TD, c, 1'b0, h, W);
          xv_d[i] = 1; xe_d[i] = 2; n_d_ok++;
          xf_d[i] = zone_ref(r, TD, c, 0, 1'b0, h) + zone_ref(r, TD, c, 1, 1'b0, h);
        end
        taps_d = r[TD-1:0];
        // ---- four-edge wave union
        h = $urandom_range(0, 7);
        if ($urandom_range(0, 4) == 0) begin
          rand_centres(3, W, 7, TF - W - 7, c); r = make_pattern(TF, c, 1'b0, h, W);
          xv_f[i] = 0; xe_f[i] = 3; n_f_short++;
        end else begin
          rand_centres(4, W, 7, TF - W - 7, c); r = make_pattern(TF, c, 1'b0, h, W);
          xv_f[i] = 1; xe_f[i] = 4; n_f_ok++;
          xf_f[i] = 0;
          for (int k = 0; k < 4; k++) xf_f[i] += zone_ref(r, TF, c, k, 1'b0, h);
        end
        taps_f = r[TF-1:0];
      end
    end
    checks++;
    if (n_h10 == 0 || n_h01 == 0 || n_hpulse == 0 || n_d_ok == 0 || n_d_short == 0 ||
        n_f_ok == 0 || n_f_short == 0) fail("a snapshot kind never occurred");
    $display("half: 1-0=%0d 0-1=%0d pulse=%0d  double: ok=%0d short=%0d  four: ok=%0d short=%0d",
             n_h10, n_h01, n_hpulse, n_d_ok, n_d_short, n_f_ok, n_f_short);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
