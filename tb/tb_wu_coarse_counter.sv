// tb_wu_coarse_counter: checks that the coarse counter resets to zero, counts
// one per reference clock, and wraps at its width (run here with 4 bits).
`timescale 1ps/1ps
module tb_wu_coarse_counter;
  localparam int unsigned W = 4;
  logic clk_ref = 1'b1, rst;
  logic [W-1:0] count;
  int checks = 0, failures = 0;
  int unsigned model;

  wu_coarse_counter #(.COARSE_W(W)) dut (.clk_ref, .rst, .count);

  always #2500 clk_ref = ~clk_ref;

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1;
    repeat (3) @(negedge clk_ref);
    checks++;
    if (count !== '0) begin failures++; $display("FAIL reset value %0d", count); end
    rst = 0;
    model = 0;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk_ref);
      model = (model + 1) % (1 << W);
      checks++;
      if (count !== W'(model)) begin
        failures++;
        $display("FAIL cycle %0d: count=%0d expected %0d", i, count, model);
      end
    end
    rst = 1;
    @(negedge clk_ref);
    checks++;
    if (count !== '0) begin failures++; $display("FAIL second reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
