// tb_wu_event_fifo: checks the event FIFO against a queue model with random
// pushes and pops: data order, empty, full, level, writes dropped when full
// and the drop counter, and pops ignored when empty.
`timescale 1ps/1ps
module tb_wu_event_fifo;
  localparam int unsigned D = 5;
  logic clk = 1'b1, rst, wr_en, rd_en, empty, full;
  wu_tdc_pkg::tdc_event_t wr_data, rd_data;
  logic [$clog2(D+1)-1:0] level;
  logic [15:0] drops;
  wu_tdc_pkg::tdc_event_t q[$];
  int checks = 0, failures = 0, exp_drops = 0, n_full = 0;

  wu_event_fifo #(.DEPTH(D)) dut (.clk, .rst, .wr_en, .wr_data, .rd_en, .rd_data,
                                  .empty, .full, .level, .drops);

  always #5000 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; wr_en = 0; rd_en = 0; wr_data = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 2000; i++) begin
      // Bias towards writing in the first half so that it fills up.
      wr_en = ($urandom % 100) < ((i < 1000) ? 70 : 35);
      rd_en = ($urandom % 100) < ((i < 1000) ? 30 : 60);
      wr_data = {$urandom, 10'($urandom)};
      chk(empty == (q.size() == 0), "empty flag");
      chk(full == (q.size() == D), "full flag");
      chk(int'(level) == q.size(), "level");
      if (q.size() > 0) chk(rd_data === q[0], "read data");
      if (full) n_full++;
      @(posedge clk);
      begin
        automatic int sz = q.size();
        if (wr_en && sz == D) exp_drops++;
        if (rd_en && sz > 0) void'(q.pop_front());
        if (wr_en && sz < D) q.push_back(wr_data);
      end
      @(negedge clk);
      chk(int'(drops) == exp_drops, "drop counter");
    end
    chk(n_full > 0, "FIFO reached full");
    chk(exp_drops > 0, "drops happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
