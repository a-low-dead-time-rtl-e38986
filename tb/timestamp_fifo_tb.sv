// timestamp_fifo_tb: random writes and reads against a queue model; checks
// the head word, empty and full, that writes into a full FIFO are dropped
// and counted, and that order is kept. Writes are made more likely than
// reads in the first half so the FIFO fills up, and less in the second.
module timestamp_fifo_tb;
  localparam int DW = 32, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic wr, rd, empty, full;
  logic [DW-1:0] wd, rdat;
  logic [15:0] drops;
  logic [DW-1:0] model [$];
  int exp_drops = 0, checks = 0, failures = 0, full_seen = 0;

  timestamp_fifo #(.DATA_W(DW), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .wr_en_i(wr), .wr_data_i(wd), .rd_en_i(rd), .rd_data_o(rdat),
    .empty_o(empty), .full_o(full), .drop_cnt_o(drops));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr = 0; rd = 0; wd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // compare state
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == DEPTH) ||
          (model.size() > 0 && rdat != model[0]) || int'(drops) != exp_drops) begin
        failures++;
        $display("FAIL i=%0d empty=%b full=%b size=%0d drops=%0d/%0d", i, empty, full, model.size(), drops, exp_drops);
      end
      if (full) full_seen++;
      wr = (i < 1000) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      rd = (i < 1000) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      wd = $urandom;
      // model update for the coming edge
      begin
        bit can_rd, can_wr;
        can_rd = rd && model.size() > 0;
        can_wr = wr && model.size() < DEPTH;
        if (wr && !can_wr) exp_drops++;
        if (can_rd) void'(model.pop_front());
        if (can_wr) model.push_back(wd);
      end
    end
    checks++;
    if (full_seen == 0 || exp_drops == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
