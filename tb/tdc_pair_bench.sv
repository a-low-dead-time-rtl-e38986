// tdc_pair_bench: two identical channels, an ideal delay-line model in front
// of each, and the checks of a cable-delay test and a code-density test.
// Used by tdc_cable_delay_tb, once per channel type.
//
// Delay-line model: equal taps of TAU and a clock period TCLK, both in
// units of 0.1 ps. At a sampling edge at time ts, tap i shows the level the
// launcher output had at ts - (i+1)*TAU. The launcher output for a hit at
// time tr depends on the channel type:
//   MODE_NORMAL      a step: high from tr for 4 ns.
//   MODE_HALF_LENGTH a square pulse of HL_PULSE taps' delay, shorter than
//                    the line, so either its rising or its falling edge is
//                    in the line when it is sampled.
//   MODE_WAVE_UNION  EDGES edges SEG apart (high, low, high, ...), with
//                    SEG = 53 taps + TAU/EDGES: far enough apart for the
//                    encoder and, through the fraction, offset from each
//                    other by 1/EDGES of a tap, so that the sum of the
//                    EDGES positions has a step of TAU/EDGES.
// Channel B sees every hit DELAY later than channel A. Hits come 8 to 12
// clocks apart at a random phase; both FIFOs are read every clock.
//
// Every hit must give exactly one word in each FIFO. From a word, the hit
// time before the sampling edge in units of TAU/EDGES (the "time code") is
//   normal, wave union : fine code (sum of the positions)
//   half-length        : position, plus HL_PULSE taps when the captured
//                        edge is the falling one (kind bit 0)
// so that the interval is, in units of TAU/EDGES,
//   EDGES * (coarse_B - coarse_A) * TCLK / TAU - (time_B - time_A)
// and must be within one TAU/EDGES of DELAY.
// Code density: over channel A's words, the time codes must cover one
// clock period without gaps (about EDGES*TCLK/TAU codes) with a flat
// histogram, and the average bin TCLK / (fine codes seen) is printed.
module tdc_pair_bench
  import tdc_pkg::*;
#(
  parameter int unsigned TAPS     = 216,
  parameter int unsigned EDGES    = 1,
  parameter tdc_mode_e   MODE     = MODE_NORMAL,
  parameter longint      TAU      = 148,
  parameter int          N_EVENTS = 200000,
  parameter string       NAME     = "normal"
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int unsigned FINE_W = fine_width(MODE, TAPS, EDGES);
  localparam int unsigned CNT_W  = $clog2(EDGES + 1);
  localparam int unsigned TS_W   = 24 + FINE_W;
  localparam longint TCLK = 25000, DELAY = 31000, STEP_W = 40000;
  localparam longint HL_PULSE = 90;
  localparam longint SEG = 53 * TAU + TAU / EDGES;

  logic [TAPS-1:0] taps_a, taps_b;
  logic v_a, v_b, we_a, we_b, em_a, em_b, fu_a, fu_b;
  logic [FINE_W-1:0] f_a, f_b;
  logic [CNT_W-1:0] e_a, e_b;
  logic [23:0] c_a, c_b;
  logic [TS_W-1:0] ts_a, ts_b;
  logic [15:0] d_a, d_b;

  tdl_tdc_channel #(.TAPS(TAPS), .EDGES(EDGES), .MODE(MODE)) u_a (.clk, .rst_n, .taps_i(taps_a),
    .fine_valid_o(v_a), .fine_o(f_a), .edges_o(e_a), .coarse_o(c_a), .wr_en_o(we_a), .rd_en_i(!em_a),
    .ts_o(ts_a), .ts_empty_o(em_a), .ts_full_o(fu_a), .ts_drop_cnt_o(d_a));
  tdl_tdc_channel #(.TAPS(TAPS), .EDGES(EDGES), .MODE(MODE)) u_b (.clk, .rst_n, .taps_i(taps_b),
    .fine_valid_o(v_b), .fine_o(f_b), .edges_o(e_b), .coarse_o(c_b), .wr_en_o(we_b), .rd_en_i(!em_b),
    .ts_o(ts_b), .ts_empty_o(em_b), .ts_full_o(fu_b), .ts_drop_cnt_o(d_b));

  logic [TS_W-1:0] qa [$], qb [$];
  int hist_t [4096];
  int hist_f [4096];
  longint sq_err = 0;
  int n_pairs = 0;

  // Level of the launcher output d after the hit.
  function automatic logic level(input longint d);
    case (MODE)
      MODE_NORMAL:      return d >= 0 && d < STEP_W;
      MODE_HALF_LENGTH: return d >= 0 && d < HL_PULSE * TAU;
      default:          return d >= 0 && d < EDGES * SEG && (d / SEG) % 2 == 0;
    endcase
  endfunction

  function automatic logic [TAPS-1:0] snapshot(input longint ts, input longint tr);
    logic [TAPS-1:0] t;
    t = '0;
    if (tr >= 0)
      for (int i = 0; i < TAPS; i++) t[i] = level(ts - longint'(i + 1) * TAU - tr);
    return t;
  endfunction

  // Time code of a FIFO word, in units of TAU/EDGES.
  function automatic longint time_code(input logic [TS_W-1:0] w);
    logic [FINE_W-1:0] f;
    f = w[FINE_W-1:0];
    if (MODE == MODE_HALF_LENGTH)
      return longint'(f[FINE_W-2:0]) + (f[FINE_W-1] ? 0 : HL_PULSE);
    return longint'(f);
  endfunction

  always @(posedge clk) begin
    if (rst_n && !em_a) qa.push_back(ts_a);
    if (rst_n && !em_b) qb.push_back(ts_b);
  end

  always @(negedge clk) begin
    while (qa.size() > 0 && qb.size() > 0) begin
      logic [TS_W-1:0] wa, wb;
      longint ta, tb, dt, err;
      wa = qa.pop_front();
      wb = qb.pop_front();
      ta = time_code(wa);
      tb = time_code(wb);
      hist_t[ta]++;
      hist_f[wa[FINE_W-1:0]]++;
      dt  = (longint'(wb[TS_W-1:FINE_W]) - longint'(wa[TS_W-1:FINE_W])) * TCLK * EDGES - (tb - ta) * TAU;
      err = dt - DELAY * EDGES;            // in units of 0.1 ps / EDGES
      sq_err += err * err;
      n_pairs++;
      checks++;
      if (err <= -TAU || err >= TAU) begin
        failures++;
        if (failures < 10) $display("%s: FAIL pair %0d interval %0.1f ps", NAME, n_pairs,
                                    real'(dt) / 10.0 / EDGES);
      end
    end
  end

  initial begin
    longint tr_a, tr_b, t_next, ts, k;
    int events;
    done = 0; checks = 0; failures = 0;
    taps_a = '0; taps_b = '0;
    tr_a = -1; tr_b = -1;
    events = 0;
    ts = 0;
    @(posedge rst_n);
    @(negedge clk);
    k = 0;                                   // sampling edges so far
    t_next = 3 * TCLK + longint'($urandom_range(0, 24999));
    while (events < N_EVENTS || ts < t_next + 6 * TCLK) begin
      ts = (k + 1) * TCLK;                   // time of the coming sampling edge
      if (events < N_EVENTS && ts >= t_next) begin
        tr_a = t_next;
        tr_b = t_next + DELAY;
        events++;
        t_next = t_next + longint'($urandom_range(8, 12)) * TCLK + longint'($urandom_range(0, 24999));
      end
      taps_a = snapshot(ts, tr_a);
      taps_b = snapshot(ts, tr_b);
      @(negedge clk);
      k++;
    end
    repeat (20) @(negedge clk);
    checks++;
    if (n_pairs != N_EVENTS || d_a != 0 || d_b != 0) begin
      failures++;
      $display("%s: FAIL %0d pairs for %0d events, drops %0d/%0d", NAME, n_pairs, N_EVENTS, d_a, d_b);
    end
    begin
      int lo, hi, used;
      real mean, span;
      lo = 4095; hi = 0; used = 0;
      for (int c = 0; c < 4096; c++) begin
        if (hist_t[c] > 0) begin
          if (c < lo) lo = c;
          if (c > hi) hi = c;
        end
        if (hist_f[c] > 0) used++;
      end
      span = real'(EDGES) * TCLK / TAU;      // time codes in one clock period
      mean = real'(N_EVENTS) / span;
      checks++;
      if (real'(hi - lo + 1) < span || real'(hi - lo + 1) > span + 2.0) begin
        failures++;
        $display("%s: FAIL time codes %0d..%0d for a period of %0.1f codes", NAME, lo, hi, span);
      end
      for (int c = lo + 1; c < hi; c++) begin
        checks++;
        if (real'(hist_t[c]) < 0.7 * mean || real'(hist_t[c]) > 1.3 * mean) begin
          failures++;
          if (failures < 10) $display("%s: FAIL time code %0d count %0d, expected about %0.0f",
                                      NAME, c, hist_t[c], mean);
        end
      end
      $display("%s: %0d hits, %0d fine codes used, average bin %0.2f ps; %0d intervals, RMS error %0.2f ps",
               NAME, N_EVENTS, used, real'(TCLK) / 10.0 / used, n_pairs,
               $sqrt(real'(sq_err) / n_pairs) / 10.0 / EDGES);
    end
    done = 1;
  end
endmodule
