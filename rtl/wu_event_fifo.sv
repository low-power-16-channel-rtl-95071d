// wu_event_fifo: per-channel FIFO of time tags.
//
// A synchronous FIFO on the encoder clock. It holds DEPTH event records of
// type tdc_event_t ({coarse, fine}) until the post-processing logic reads
// them.
// The read port is first-word-fall-through: rd_data shows the oldest record
// whenever empty is low, and rd_en pops it. A write while the FIFO is full is
// dropped and counted in drops (saturating), so that lost events are visible.
// A read while empty is ignored.
//
// Interface: clk, synchronous active-high rst. wr_en/wr_data push and
// rd_en/rd_data pop, both on the same clock edge; level reports the fill.
//
// The paper says only that events go to a FIFO. The depth, the read protocol
// and the drop counter are this design's choices.
`timescale 1ps/1ps
module wu_event_fifo
#(
  parameter int unsigned DEPTH  = wu_tdc_pkg::FIFO_DEPTH,
  parameter int unsigned DROP_W = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     wr_en,
  input  wu_tdc_pkg::tdc_event_t               wr_data,
  input  logic                     rd_en,
  output wu_tdc_pkg::tdc_event_t               rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH+1)-1:0] level,
  output logic [DROP_W-1:0]        drops
);

  localparam int unsigned LVL_W = $clog2(DEPTH + 1);
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  wu_tdc_pkg::tdc_event_t mem [DEPTH];
  logic [PTR_W-1:0] wr_ptr, rd_ptr;
  logic do_wr, do_rd;

  always_comb begin
    empty   = (level == 0);
    full    = (int'(level) == DEPTH);
    do_wr   = wr_en && !full;
    do_rd   = rd_en && !empty;
    rd_data = mem[rd_ptr];
  end

  function automatic logic [PTR_W-1:0] next_ptr(logic [PTR_W-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      level  <= '0;
      drops  <= '0;
    end else begin
      if (do_wr) wr_ptr <= next_ptr(wr_ptr);
      if (do_rd) rd_ptr <= next_ptr(rd_ptr);
      level <= level + LVL_W'(do_wr) - LVL_W'(do_rd);
      if (wr_en && full && !(&drops)) drops <= drops + 1'b1;
    end
  end

  a_level: assert property (@(posedge clk) disable iff (rst) int'(level) <= DEPTH);

endmodule
