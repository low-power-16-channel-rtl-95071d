// wu_capture_reg: the N-bit parallel register that freezes the delay line,
// plus the enable flip-flop that stops it.
//
// The register samples every tap on each reference clock edge while it is
// enabled. The enable flip-flop samples the launch latch on the same clock.
// So at the first reference edge after an event, the register takes its last
// sample, which is the position of the wave union at that edge, and the flop
// sets frozen. From then on the register holds. The same edge also freezes the
// coarse count. That count is the counter value during the clock period in
// which the event arrived; the stopping edge ends that period. Re-arming
// (arm high) clears frozen asynchronously, and sampling resumes.
//
// Interface: clk_ref is the 200 MHz reference clock. launch and arm are
// asynchronous. snap, coarse_tag and frozen change only on clk_ref, and snap
// and coarse_tag stay constant while frozen is high, so the encoder may read
// them from another clock domain once it has synchronised frozen.
//
// The register, its active-low enable and the enable flop clocked by the
// reference clock follow the paper's block diagram. Freezing the coarse count
// in the same register is this design's choice.
`timescale 1ps/1ps
module wu_capture_reg #(
  parameter int unsigned N_TAPS   = wu_tdc_pkg::N_TAPS,
  parameter int unsigned COARSE_W = wu_tdc_pkg::COARSE_W
) (
  input  logic                clk_ref,
  input  logic                arm,         // asynchronous clear of frozen
  input  logic                launch,      // from the input latch
  input  logic [N_TAPS-1:0]   taps,        // live delay line taps
  input  logic [COARSE_W-1:0] coarse_in,   // free-running coarse counter
  output logic                frozen,      // register disabled (En-bar)
  output logic [N_TAPS-1:0]   snap,        // frozen tap pattern
  output logic [COARSE_W-1:0] coarse_tag   // coarse time of the event
);

  always_ff @(posedge clk_ref or posedge arm) begin
    if (arm) frozen <= 1'b0;
    else     frozen <= launch;
  end

  always_ff @(posedge clk_ref) begin
    if (!frozen) begin
      snap       <= taps;
      coarse_tag <= coarse_in;
    end
  end

endmodule
