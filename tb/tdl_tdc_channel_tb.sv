// tdl_tdc_channel_tb: end-to-end run of one normal TDL TDC channel at its
// default size (216 taps, 24-bit pieces, one edge, 24-bit coarse counter,
// 16-word FIFO).
//
// The testbench plays the part of the delay line: on every clock it drives
// a tap snapshot. Hit scenarios, chosen at random:
//   - a step edge with bubbles, seen in one sample only;
//   - a step edge seen in two adjacent samples (the edge has moved on by
//     about one clock period of taps): must be written once;
//   - the line full of ones, the hit then ending (0-1 pattern) and the
//     line empty: no hit may be reported.
// Checks, all against values computed from the taps by counting:
//   fine code and valid LATENCY clocks after sampling, the coarse time
//   of the sampling period, the write enable, and every word read from
//   the FIFO, in order. A stretch without reads fills the FIFO so that
//   writes are dropped and counted.
// Each mechanism (hit, bubble correction, repeated-sample suppression,
// non-thermometer snapshot rejected, FIFO full and drop) must occur.
module tdl_tdc_channel_tb;
  import tdc_pkg::*;
  import tdc_tb_pkg::*;
  localparam int TAPS = 216, W = 24, LAT = 3, OFFS = LAT + 1, DEPTH = 16;
  localparam int N = 3000;
  localparam int STEP = 160;   // taps travelled in one 2.5 ns clock (about 15.6 ps per tap)

  logic clk = 0, rst_n = 0;
  logic [TAPS-1:0] taps;
  logic fv, we, rd, empty, full;
  logic [7:0] fine;
  logic [0:0] edges;
  logic [23:0] coarse;
  logic [31:0] ts;
  logic [15:0] drops;

  tdl_tdc_channel dut (
    .clk, .rst_n, .taps_i(taps), .fine_valid_o(fv), .fine_o(fine), .edges_o(edges),
    .coarse_o(coarse), .wr_en_o(we), .rd_en_i(rd), .ts_o(ts), .ts_empty_o(empty),
    .ts_full_o(full), .ts_drop_cnt_o(drops));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_hits = 0, n_bubbled = 0, n_repeat = 0, n_rejected = 0, n_full = 0, n_written = 0;
  bit exp_v [N]; int exp_f [N]; int exp_c [N];
  logic [31:0] model [$];
  int exp_drops = 0;
  int posedges = 0;
  bit prev_v = 0;

  always @(posedge clk) if (rst_n) posedges++;

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
    int state, pend_c;
    raw_t r;
    taps = '0;
    rd = 0;
    state = 0;
    pend_c = -1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N + OFFS; i++) begin
      @(negedge clk);
      // ---- outputs for the snapshot driven OFFS clocks ago
      if (i >= OFFS) begin
        int j;
        bit ew;
        j = i - OFFS;
        checks++;
        if (fv != exp_v[j] || (exp_v[j] && int'(fine) != exp_f[j]) ||
            (exp_v[j] && int'(coarse) != exp_c[j]))
          fail($sformatf("j=%0d valid=%b fine=%0d coarse=%0d expected %b %0d %0d",
                         j, fv, fine, coarse, exp_v[j], exp_f[j], exp_c[j]));
        ew = exp_v[j] && !prev_v;
        checks++;
        if (we != ew) fail($sformatf("j=%0d write enable %b", j, we));
        if (exp_v[j] && prev_v) n_repeat++;
        prev_v = exp_v[j];
        // FIFO model
        checks++;
        if (empty != (model.size() == 0) || full != (model.size() == DEPTH) ||
            (model.size() > 0 && ts != model[0]) || int'(drops) != exp_drops)
          fail($sformatf("j=%0d fifo empty=%b full=%b ts=%h size=%0d", j, empty, full, ts, model.size()));
        if (full) n_full++;
        rd = (i > 1000 && i < 1400) ? 1'b0 : ($urandom_range(0, 1) == 1);
        begin
          bit can_wr, can_rd;
          can_wr = ew && model.size() < DEPTH;   // a full FIFO drops, even when read
          can_rd = rd && model.size() > 0;
          if (ew && !can_wr) exp_drops++;
          if (can_rd) void'(model.pop_front());
          if (can_wr) model.push_back({24'(exp_c[j]), 8'(exp_f[j])});
          if (ew) n_written++;
        end
      end else rd = 0;
      // ---- next snapshot
      if (i < N) begin
        int c[$], h;
        c.delete();
        h = $urandom_range(0, 7);
        exp_v[i] = 0;
        exp_f[i] = 0;
        exp_c[i] = (posedges + 1) % (1 << 24);
        if (pend_c >= 0) begin
          // the edge of the previous sample, one clock further down the line
          c.push_back(pend_c);
          r = make_pattern(TAPS, c, 1'b1, h, W);
          exp_v[i] = 1;
          exp_f[i] = zone_ref(r, TAPS, c, 0, 1'b1, h);
          n_hits++;
          pend_c = -1;
          state = 1;
        end else begin
          case (state)
            1: begin r = raw_t'({TAPS{1'b1}}); state = 2; end            // line full
            2: begin                                                     // hit ended: 0-1
              rand_centres(1, W, 7, TAPS - W - 7, c);
              r = make_pattern(TAPS, c, 1'b0, h, W);
              n_rejected++;
              state = 0;
            end
            default: begin
              if ($urandom_range(0, 2) == 0) r = '0;                     // idle
              else begin
                if ($urandom_range(0, 3) == 0) c.push_back(31 + $urandom_range(0, 9));  // near the line start
                else rand_centres(1, W, 7, TAPS - W - 7, c);
                r = make_pattern(TAPS, c, 1'b1, h, W);
                exp_v[i] = 1;
                exp_f[i] = zone_ref(r, TAPS, c, 0, 1'b1, h);
                n_hits++;
                if (h > 0) n_bubbled++;
                if (c[0] + STEP <= TAPS - 16) pend_c = c[0] + STEP;   // still in the line next clock
                else state = 1;
              end
            end
          endcase
        end
        taps = r[TAPS-1:0];
      end
    end
    checks++;
    if (n_hits == 0 || n_bubbled == 0 || n_repeat == 0 || n_rejected == 0 || n_full == 0 || exp_drops == 0)
      fail("a mechanism never occurred");
    $display("hits=%0d bubbled=%0d repeated=%0d rejected=%0d full_cycles=%0d written=%0d dropped=%0d",
             n_hits, n_bubbled, n_repeat, n_rejected, n_full, n_written, exp_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
