// wu_tdc_top: 16-channel wave union TDC.
//
// Sixteen independent TDC channels share one free-running coarse counter on the
// 200 MHz reference clock, so every time tag uses one time base and tags from
// different channels can be subtracted directly. Each tag is {coarse, fine}.
// coarse counts the reference periods. fine is the wave union code: it places
// the event within the period that coarse names. Each channel keeps its own
// FIFO and has its own read port. A per-channel cal_sel switches the channel's
// input from its pad to the shared calibration clock alt_clk, for code density
// (histogram) calibration.
//
// Clocks: clk_ref is the external low-jitter 200 MHz reference (no PLL).
// clk_enc is the 100 MHz encoder clock, taken as an input, edge-aligned with
// clk_ref. rst is synchronous and held for a few cycles of both clocks.
// Read ports work on clk_enc.
//
// The channel count, the clocks and the shared counter follow the paper. The
// read-out ports and the encoder clock taken as an input are this design's
// choices.
`timescale 1ps/1ps
module wu_tdc_top
#(
  parameter int unsigned N_CH       = wu_tdc_pkg::N_CHANNELS,
  parameter int unsigned N_TAPS     = wu_tdc_pkg::N_TAPS,
  parameter int unsigned FIFO_DEPTH = wu_tdc_pkg::FIFO_DEPTH,
  parameter int unsigned TAP_PS     = 20,
  parameter int unsigned WU_FALL_PS = 200,
  parameter int unsigned WU_RISE_PS = 400
) (
  input  logic                clk_ref,
  input  logic                clk_enc,
  input  logic                rst,
  input  logic [N_CH-1:0]     hit_pad,
  input  logic                alt_clk,
  input  logic [N_CH-1:0]     cal_sel,
  input  logic [N_CH-1:0]     rd_en,
  output wu_tdc_pkg::tdc_event_t          rd_data  [N_CH],
  output logic [N_CH-1:0]     rd_empty,
  output logic [N_CH-1:0]     rd_full,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] rd_level [N_CH],
  output logic [15:0]         drops    [N_CH],
  output logic [N_CH-1:0]     busy,
  output logic [wu_tdc_pkg::COARSE_W-1:0] coarse_now
);

  logic rst_ref;
  always_ff @(posedge clk_ref) rst_ref <= rst;

  wu_coarse_counter #(.COARSE_W(wu_tdc_pkg::COARSE_W)) u_coarse (
    .clk_ref, .rst(rst_ref), .count(coarse_now)
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    wu_tdc_channel #(
      .N_TAPS(N_TAPS), .FIFO_DEPTH(FIFO_DEPTH),
      .TAP_PS(TAP_PS), .WU_FALL_PS(WU_FALL_PS), .WU_RISE_PS(WU_RISE_PS)
    ) u_ch (
      .clk_ref, .clk_enc, .rst,
      .hit_pad(hit_pad[c]), .alt_clk, .cal_sel(cal_sel[c]),
      .coarse(coarse_now),
      .rd_en(rd_en[c]), .rd_data(rd_data[c]), .rd_empty(rd_empty[c]), .rd_full(rd_full[c]), .rd_level(rd_level[c]),
      .drops(drops[c]), .busy(busy[c])
    );
  end

endmodule
