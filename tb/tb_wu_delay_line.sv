// tb_wu_delay_line: checks the behavioural delay line. It launches the wave
// union, then compares every tap at many instants with the pattern worked out
// from the tap delay and the two waveform delays: tap i shows the launched
// waveform (i+1) tap delays late. The waveform is high from 0 to WU_FALL_PS,
// low until WU_RISE_PS and high afterwards. The check is repeated after
// re-arming, when a single falling edge leaves the launcher WU_RISE_PS late.
`timescale 1ps/1ps
module tb_wu_delay_line;
  localparam int unsigned N = 320, TAP = 20, FALL = 200, RISE = 400;
  logic launch;
  logic [N-1:0] taps;
  int checks = 0, failures = 0;
  longint t0;

  wu_delay_line #(.N_TAPS(N), .TAP_PS(TAP), .WU_FALL_PS(FALL), .WU_RISE_PS(RISE))
    dut (.launch, .taps);

  function automatic logic wave_at(longint tau, logic rising);
    if (rising) return (tau >= 0) && ((tau < FALL) || (tau >= RISE));
    else        return !(tau >= 0);  // falling: line returns to 0 behind the edge
  endfunction

  task automatic check_all(input logic rising, input logic prev_level);
    logic exp;
    int bad = 0;
    for (int i = 0; i < N; i++) begin
      // After re-arm the launcher output stays high for WU_RISE_PS.
      longint tau = $time - t0 - longint'((i + 1) * TAP) - (rising ? 0 : RISE);
      exp = rising ? wave_at(tau, 1'b1) : ((tau >= 0) ? 1'b0 : prev_level);
      if (taps[i] !== exp) bad++;
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL t=%0d: %0d taps differ", $time - t0, bad);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    launch = 0;
    #10000;
    checks++;
    if (taps !== '0) begin failures++; $display("FAIL line not idle"); end
    launch = 1;
    t0 = $time;
    for (int k = 0; k < 80; k++) begin
      #97;
      // Never sample exactly on a tap edge.
      if (($time - t0) % TAP != 0) check_all(1'b1, 1'b0);
    end
    #10000;
    checks++;
    if (taps !== '1) begin failures++; $display("FAIL line not settled high"); end
    launch = 0;
    t0 = $time;
    for (int k = 0; k < 40; k++) begin
      #173;
      if (($time - t0) % TAP != 0) check_all(1'b0, 1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
