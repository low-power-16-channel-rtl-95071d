// tb_wu_capture_reg: checks that the register follows the taps while idle and
// freezes on the first reference edge after launch rises, holding both the
// tap pattern and the coarse count of that edge, and that arm clears the
// freeze. Taps change at random between clock edges.
`timescale 1ps/1ps
module tb_wu_capture_reg;
  localparam int unsigned N = 64, CW = 16;
  logic clk_ref = 1'b1, arm, launch;
  logic [N-1:0] taps, snap, exp_snap;
  logic [CW-1:0] coarse, coarse_tag, exp_coarse;
  logic frozen;
  int checks = 0, failures = 0;

  wu_capture_reg #(.N_TAPS(N), .COARSE_W(CW)) dut (
    .clk_ref, .arm, .launch, .taps, .coarse_in(coarse), .frozen, .snap, .coarse_tag);

  always #2500 clk_ref = ~clk_ref;
  always_ff @(posedge clk_ref) coarse <= coarse + 1'b1;

  function automatic logic [N-1:0] rnd();
    return {$urandom, $urandom};
  endfunction

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    coarse = '0; launch = 0; arm = 1; taps = '0;
    #12000;
    arm = 0;
    for (int ev = 0; ev < 20; ev++) begin
      // Idle: the register follows the taps.
      @(posedge clk_ref); #700;
      taps = rnd();
      @(posedge clk_ref); #300;
      chk(!frozen, "not frozen while idle");
      chk(snap === taps, "register follows taps while idle");
      // Event somewhere inside the period.
      #(100 + ($urandom % 4000));
      launch = 1;
      #(1 + $urandom % 50);
      taps = rnd();
      // The next edge freezes; record what it must take.
      exp_snap = taps;
      exp_coarse = coarse;   // value the counter holds up to that edge
      @(posedge clk_ref);
      #10;
      chk(frozen, "frozen after first edge");
      chk(snap === exp_snap, "snapshot taken at the stopping edge");
      chk(coarse_tag === exp_coarse, "coarse count of the stopping edge");
      for (int k = 0; k < 3; k++) begin
        taps = rnd();
        @(posedge clk_ref); #10;
        chk(snap === exp_snap && coarse_tag === exp_coarse, "holds while frozen");
      end
      // Re-arm.
      #1000;
      arm = 1; launch = 0;
      #200;
      chk(!frozen, "arm clears frozen");
      arm = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
