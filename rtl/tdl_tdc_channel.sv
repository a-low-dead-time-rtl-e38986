// tdl_tdc_channel: one channel of an FPGA tapped-delay-line TDC with the
// divide-and-conquer fine-time encoder.
//
// Data path (one word per clock, fully pipelined):
//   taps_i -> tdl_sampler (sampling flip-flops, raw data)
//          -> pre_encoder (local sums of 24-bit pieces, flags, Sel array)
//          -> backend_encoder (EDGES cascaded stages: priority encoder,
//             multiplexers, M&A block; final adder) -> fine code + valid
//          -> hit_write_enable (valid now and not in the period before)
//          -> timestamp_fifo ({coarse, fine} words)
// The coarse time is a free-running counter. Since it advances by exactly
// one per clock, the coarse time of the sampling period is the present count
// minus the encoder latency; no delay line of counter values is needed.
//
// taps_i are the outputs of the delay line (tap 0 nearest the launcher),
// asynchronous to clk; the delay line and its launcher are outside this
// module. Defaults are those of the normal TDL TDC: 216 taps (54 CARRY4
// cells), 24-bit pieces, one edge, 8-bit fine code. The half-length
// (120 taps, MODE_HALF_LENGTH), double-edge (288 taps, EDGES=2) and
// four-edge (360 taps, EDGES=4) wave-union channels use the same module.
//
// Timing: a snapshot sampled by clock edge n gives fine_valid_o/fine_o in
// the period after edge n + LATENCY (LATENCY = EDGES + 2), and a FIFO write
// at the same time. Encoder dead time: one clock; channel dead time: two.
// Read side: first-word-fall-through, rd_en_i pops ts_o when ts_empty_o is
// low. ts_o = {coarse[COARSE_W-1:0], fine[FINE_W-1:0]}.
//
// The block structure (sampling flip-flops, encoder, coarse counter) and
// the write enable from two adjacent periods follow the published TDC; the
// coarse alignment, the FIFO and its read side are this design's choices.
module tdl_tdc_channel
  import tdc_pkg::*;
#(
  parameter int unsigned TAPS       = 216,
  parameter int unsigned PIECE_W    = 24,
  parameter int unsigned EDGES      = 1,
  parameter tdc_mode_e   MODE       = MODE_NORMAL,
  parameter int unsigned COARSE_W   = 24,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned NP        = TAPS / PIECE_W,
  localparam int unsigned LS_W      = $clog2(PIECE_W + 1),
  localparam int unsigned FINE_W    = fine_width(MODE, TAPS, EDGES),
  localparam int unsigned CNT_W     = $clog2(EDGES + 1),
  localparam int unsigned TS_W      = COARSE_W + FINE_W,
  localparam int unsigned LATENCY   = encoder_latency(EDGES)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [TAPS-1:0]     taps_i,
  // Encoder output, every clock
  output logic                fine_valid_o,
  output logic [FINE_W-1:0]   fine_o,
  output logic [CNT_W-1:0]    edges_o,
  output logic [COARSE_W-1:0] coarse_o,
  output logic                wr_en_o,
  // Timestamp FIFO read side
  input  logic                rd_en_i,
  output logic [TS_W-1:0]     ts_o,
  output logic                ts_empty_o,
  output logic                ts_full_o,
  output logic [15:0]         ts_drop_cnt_o
);
  logic [TAPS-1:0]           raw;
  logic [NP-1:0][LS_W-1:0]   lsum;
  logic [NP-2:0]             sel;
  logic [COARSE_W-1:0]       coarse_now;
  logic [EDGES-1:0][$clog2(TAPS+1)-1:0] pos_unused;
  trans_e [EDGES-1:0]        kind_unused;

  tdl_sampler #(.TAPS(TAPS)) u_sampler (
    .clk(clk), .rst_n(rst_n), .taps_i(taps_i), .raw_o(raw)
  );

  pre_encoder #(.TAPS(TAPS), .PIECE_W(PIECE_W)) u_pre (
    .clk(clk), .rst_n(rst_n), .raw_i(raw), .lsum_o(lsum), .sel_o(sel)
  );

  backend_encoder #(
    .TAPS(TAPS), .PIECE_W(PIECE_W), .EDGES(EDGES), .MODE(MODE)
  ) u_back (
    .clk    (clk),
    .rst_n  (rst_n),
    .lsum_i (lsum),
    .sel_i  (sel),
    .valid_o(fine_valid_o),
    .fine_o (fine_o),
    .edges_o(edges_o),
    .pos_o  (pos_unused),
    .kind_o (kind_unused)
  );

  coarse_counter #(.WIDTH(COARSE_W)) u_coarse (
    .clk(clk), .rst_n(rst_n), .count_o(coarse_now)
  );

  // Coarse time of the period whose snapshot is now leaving the encoder.
  assign coarse_o = coarse_now - COARSE_W'(LATENCY);

  hit_write_enable u_we (
    .clk(clk), .rst_n(rst_n), .valid_i(fine_valid_o), .we_o(wr_en_o)
  );

  timestamp_fifo #(.DATA_W(TS_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk       (clk),
    .rst_n     (rst_n),
    .wr_en_i   (wr_en_o),
    .wr_data_i ({coarse_o, fine_o}),
    .rd_en_i   (rd_en_i),
    .rd_data_o (ts_o),
    .empty_o   (ts_empty_o),
    .full_o    (ts_full_o),
    .drop_cnt_o(ts_drop_cnt_o)
  );
endmodule
