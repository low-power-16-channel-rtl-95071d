// wu_tdc_channel: one complete wave union TDC channel.
//
// Data path: the event (or the calibration clock, selected by cal_sel) sets
// the input latch. The latch launches the wave union into the delay line and
// sets the enable flop, so the capture register freezes the taps and the
// coarse count at the next reference clock edge. The encoder controller sees
// the frozen flag, counts the ones run from the left and the zeros run from the
// right over the four combs, adds them into the fine code, writes
// {coarse, fine} into the FIFO and re-arms the latch.
//
// Clocks: clk_ref (200 MHz) clocks the capture register and the shared coarse
// counter that drives coarse. clk_enc (100 MHz) clocks the encoder and the
// FIFO. rst is synchronous to clk_enc. One event takes at most 42 encoder
// cycles to encode, plus a few cycles of synchronisation and re-arm. Events
// that arrive during that time are lost.
//
// The structure follows the paper's block diagram. The FIFO read port and the
// synchroniser are this design's choices. The delay line is a behavioural model
// of the FPGA carry chain.
`timescale 1ps/1ps
module wu_tdc_channel
#(
  parameter int unsigned N_TAPS     = wu_tdc_pkg::N_TAPS,
  parameter int unsigned SEGMENTS   = wu_tdc_pkg::SEGMENTS,
  parameter int unsigned CHUNKS     = wu_tdc_pkg::CHUNKS,
  parameter int unsigned CHUNK_W    = wu_tdc_pkg::CHUNK_W,
  parameter int unsigned FIFO_DEPTH = wu_tdc_pkg::FIFO_DEPTH,
  parameter int unsigned TAP_PS     = 20,
  parameter int unsigned WU_FALL_PS = 200,
  parameter int unsigned WU_RISE_PS = 400
) (
  input  logic                clk_ref,
  input  logic                clk_enc,
  input  logic                rst,
  input  logic                hit_pad,
  input  logic                alt_clk,
  input  logic                cal_sel,
  input  logic [wu_tdc_pkg::COARSE_W-1:0] coarse,
  input  logic                rd_en,
  output wu_tdc_pkg::tdc_event_t          rd_data,
  output logic                rd_empty,
  output logic                rd_full,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] rd_level,
  output logic [15:0]         drops,
  output logic                busy
);

  logic              arm, launch, frozen, ev_valid;
  logic [N_TAPS-1:0] taps, snap;
  logic [wu_tdc_pkg::COARSE_W-1:0] coarse_tag;
  wu_tdc_pkg::tdc_event_t        ev;

  wu_input_latch u_latch (
    .hit_pad, .alt_clk, .cal_sel, .arm, .launch
  );

  wu_delay_line #(
    .N_TAPS(N_TAPS), .TAP_PS(TAP_PS), .WU_FALL_PS(WU_FALL_PS), .WU_RISE_PS(WU_RISE_PS)
  ) u_line (
    .launch, .taps
  );

  wu_capture_reg #(.N_TAPS(N_TAPS), .COARSE_W(wu_tdc_pkg::COARSE_W)) u_capture (
    .clk_ref, .arm, .launch, .taps, .coarse_in(coarse), .frozen, .snap, .coarse_tag
  );

  wu_fine_encoder #(
    .N_TAPS(N_TAPS), .SEGMENTS(SEGMENTS), .CHUNKS(CHUNKS), .CHUNK_W(CHUNK_W)
  ) u_encoder (
    .clk(clk_enc), .rst, .frozen, .snap, .coarse_tag, .arm, .ev_valid, .ev, .busy
  );

  wu_event_fifo #(.DEPTH(FIFO_DEPTH), .DROP_W(16)) u_fifo (
    .clk(clk_enc), .rst, .wr_en(ev_valid), .wr_data(ev), .rd_en, .rd_data,
    .empty(rd_empty), .full(rd_full), .level(rd_level), .drops
  );

endmodule
