// wu_input_latch: event source select and launch latch of one TDC channel.
//
// A 2:1 multiplexer picks the event input pad or, for code density
// calibration, an alternate clock that is uncorrelated with the reference
// clock. The first rising edge of the selected signal sets the latch; its
// output launches the wave union into the tapped delay line and stays high,
// so further edges are ignored until the encoder controller pulses arm.
//
// Interface: hit_pad, alt_clk and cal_sel are asynchronous inputs. arm is an
// asynchronous clear, active high, and dominates: while arm is high the latch
// stays clear and events are lost (dead time). launch is asynchronous to every
// clock.
//
// The multiplexer ahead of the latch and the reset/arm input follow the paper's
// block diagram. Building the latch as a flip-flop clocked by the event with its
// data input tied high and an asynchronous clear is this design's choice. It is
// the usual way to build a set-on-edge latch in FPGA fabric.
`timescale 1ps/1ps
module wu_input_latch (
  input  logic hit_pad,   // event from the input pad
  input  logic alt_clk,   // uncorrelated calibration clock
  input  logic cal_sel,   // 1: alt_clk feeds the latch
  input  logic arm,       // asynchronous clear / re-arm
  output logic launch     // latch output, starts the wave union
);

  logic event_in;

  always_comb event_in = cal_sel ? alt_clk : hit_pad;

  always_ff @(posedge event_in or posedge arm) begin
    if (arm) launch <= 1'b0;
    else     launch <= 1'b1;
  end

endmodule
