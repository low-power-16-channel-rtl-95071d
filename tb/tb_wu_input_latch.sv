// tb_wu_input_latch: checks the event select multiplexer and the launch latch.
// It drives the pad, the calibration clock, the select and the re-arm input,
// and checks that only a rising edge of the selected source sets launch, that
// the latch holds, and that arm clears it and blocks it while high.
`timescale 1ps/1ps
module tb_wu_input_latch;
  logic hit_pad, alt_clk, cal_sel, arm, launch;
  int checks = 0, failures = 0;

  wu_input_latch dut (.hit_pad, .alt_clk, .cal_sel, .arm, .launch);

  task automatic expect_launch(input logic exp, input string what);
    #10;
    checks++;
    if (launch !== exp) begin
      failures++;
      $display("FAIL %s: launch=%0b expected %0b", what, launch, exp);
    end
  endtask

  task automatic pulse(ref logic s);
    s = 1'b1; #50; s = 1'b0; #50;
  endtask

  initial begin
    #20000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hit_pad = 0; alt_clk = 0; cal_sel = 0; arm = 0;
    #10 arm = 1;
    #100;
    expect_launch(1'b0, "cleared by arm");
    arm = 0; #100;
    expect_launch(1'b0, "idle after arm");
    // Pad selected: calibration clock edges are ignored.
    pulse(alt_clk);
    expect_launch(1'b0, "alt_clk ignored when cal_sel=0");
    hit_pad = 1;
    expect_launch(1'b1, "pad edge sets latch");
    hit_pad = 0;
    expect_launch(1'b1, "latch holds after pad falls");
    pulse(hit_pad);
    expect_launch(1'b1, "second edge keeps it set");
    arm = 1;
    expect_launch(1'b0, "arm clears");
    pulse(hit_pad);
    expect_launch(1'b0, "edge while arm high is lost");
    arm = 0; #50;
    // Calibration clock selected.
    cal_sel = 1; #50;
    pulse(hit_pad);
    expect_launch(1'b0, "pad ignored when cal_sel=1");
    for (int i = 0; i < 3; i++) begin
      alt_clk = 1;
      expect_launch(1'b1, "alt_clk edge sets latch");
      alt_clk = 0; #40;
      arm = 1; #20;
      expect_launch(1'b0, "re-armed");
      arm = 0; #40;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
