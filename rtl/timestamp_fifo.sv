// timestamp_fifo: buffer for the timestamps of one TDC channel.
//
// A synchronous first-word-fall-through FIFO of DEPTH words. A word is
// written when wr_en_i is high and the FIFO is not full; a write into a
// full FIFO is dropped and counted in drop_cnt_o (saturating). rd_data_o
// shows the oldest word whenever empty_o is low, and rd_en_i removes it.
// Reading and writing in the same cycle is allowed. The paper this design
// follows only says that the channel writes into a FIFO; depth, drop
// handling and the read interface are choices of this design.
module timestamp_fifo #(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned DEPTH  = 16,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en_i,
  input  logic [DATA_W-1:0] wr_data_i,
  input  logic              rd_en_i,
  output logic [DATA_W-1:0] rd_data_o,
  output logic              empty_o,
  output logic              full_o,
  output logic [15:0]       drop_cnt_o
);
  logic [DATA_W-1:0] mem [DEPTH];
  logic [AW:0]       wr_ptr, rd_ptr;
  logic              do_wr, do_rd;

  assign empty_o = (wr_ptr == rd_ptr);
  assign full_o  = (wr_ptr[AW] != rd_ptr[AW]) && (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]);
  assign do_wr   = wr_en_i && !full_o;
  assign do_rd   = rd_en_i && !empty_o;
  assign rd_data_o = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= wr_data_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      drop_cnt_o <= '0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      if (wr_en_i && full_o && drop_cnt_o != '1) drop_cnt_o <= drop_cnt_o + 1'b1;
    end
  end

  initial begin
    assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
      else $error("timestamp_fifo: DEPTH must be a power of two");
  end
endmodule
