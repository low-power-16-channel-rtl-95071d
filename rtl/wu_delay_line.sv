// wu_delay_line: behavioural model of the launcher and the tapped carry-chain
// delay line (not synthesizable; the real part is placed carry logic).
//
// In the FPGA the line is a chain of CCU2 carry cells: 23 cells make the
// launcher and 137 the main line. Each cell gives two taps, so the encoder sees
// 320 taps. Tap 0 is at the launcher end, and the waveform moves towards tap
// N_TAPS-1. This model gives every tap the same delay TAP_PS. Each tap is a
// transport delay (a non-blocking assignment with an intra-assignment delay),
// so pulses of any width pass.
//
// Wave union waveform: the paper says only that the launcher shapes a waveform
// with fixed delays between several edges. Here the rising edge of launch
// becomes rise(0) - fall(WU_FALL_PS) - rise(WU_RISE_PS), after which the line
// stays high. A frozen snapshot therefore reads, from tap 0 onwards:
// ones (past the last edge), zeros (the gap), ones, then zeros (not reached).
// When launch falls again (re-arm), one falling edge sweeps the line back to 0.
//
// Interface: launch in, taps out, both asynchronous. The timescale is 1 ps.
// The tap count comes from the paper. TAP_PS and the two waveform delays are
// this model's choice: 320 taps of 20 ps span more than one 5 ns reference
// clock period, as a working line must.
`timescale 1ps/1ps
module wu_delay_line #(
  parameter int unsigned N_TAPS     = 320,  // total taps, launcher included
  parameter int unsigned TAP_PS     = 20,   // delay per tap
  parameter int unsigned WU_FALL_PS = 200,  // first rise to falling edge
  parameter int unsigned WU_RISE_PS = 400   // first rise to second rising edge
) (
  input  logic              launch,
  output logic [N_TAPS-1:0] taps
);

  logic d_fall, d_rise, wave;

  initial begin
    d_fall = 1'b0;
    d_rise = 1'b0;
    taps   = '0;
  end

  // Launcher: shape the wave union from the latch edge.
  always @(launch) d_fall <= #(WU_FALL_PS) launch;
  always @(launch) d_rise <= #(WU_RISE_PS) launch;
  always_comb wave = (launch & ~d_fall) | d_rise;

  // Tapped line: one transport delay per tap.
  always @(wave) taps[0] <= #(TAP_PS) wave;
  for (genvar i = 1; i < N_TAPS; i++) begin : g_tap
    always @(taps[i-1]) taps[i] <= #(TAP_PS) taps[i-1];
  end

endmodule
