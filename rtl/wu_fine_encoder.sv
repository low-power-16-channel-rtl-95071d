// wu_fine_encoder: encoder controller of one TDC channel. It runs the ones and
// zeros edge encoders, adds their counts into the fine code, stores the event
// and re-arms the channel.
//
// Sequence, all on the 100 MHz encoder clock:
//   IDLE   waits for the capture register's frozen flag (brought in through a
//          two-flop synchroniser) and starts both edge encoders;
//   RUN    both sides scan their chunks in parallel (at most 4*10 cycles);
//          on the edge after both are done, fine = ones run from the left +
//          zeros run from the right is registered (first overhead cycle);
//   STORE  ev_valid is high for one cycle with {coarse, fine}; the FIFO takes
//          it on the next edge (second overhead cycle), and arm is set;
//   REARM  arm stays high, clearing the latch and the enable flop, until the
//          synchronised frozen flag has fallen; then back to IDLE.
// The FIFO write edge is C + 2 edges after the edge that accepts start, where C
// is the larger side's chunk count. That is at most N*M + K = 4*10 + 2 = 42 cycles (420 ns).
//
// Interface: clk is the encoder clock. rst is synchronous and must last at
// least two cycles; arm toggles during it, so the latch and the enable flop
// start clear. frozen is asynchronous.
// snap and coarse_tag are read only while frozen is high, when they hold still.
// arm is registered and goes to asynchronous clears in the reference domain.
//
// The cycle budget, the sum of the two edge distances as the fine code and the
// controller that re-arms the channel follow the paper. The synchroniser, the
// state names and the one-cycle valid strobe are this design's choices.
`timescale 1ps/1ps
module wu_fine_encoder
#(
  parameter int unsigned N_TAPS   = wu_tdc_pkg::N_TAPS,
  parameter int unsigned SEGMENTS = wu_tdc_pkg::SEGMENTS,
  parameter int unsigned CHUNKS   = wu_tdc_pkg::CHUNKS,
  parameter int unsigned CHUNK_W  = wu_tdc_pkg::CHUNK_W
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                frozen,      // from the capture register
  input  logic [N_TAPS-1:0]   snap,
  input  logic [wu_tdc_pkg::COARSE_W-1:0] coarse_tag,
  output logic                arm,         // reset/arm to latch and enable flop
  output logic                ev_valid,    // one-cycle strobe
  output wu_tdc_pkg::tdc_event_t          ev,
  output logic                busy         // an event is being encoded
);

  localparam int unsigned CNT_W  = $clog2(N_TAPS + 1);
  localparam int unsigned FINE_W = wu_tdc_pkg::FINE_W;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_STORE, S_REARM} state_t;
  state_t state;

  logic [1:0] frozen_sync;
  logic       frozen_s;
  always_ff @(posedge clk) frozen_sync <= {frozen_sync[0], frozen};
  always_comb frozen_s = frozen_sync[1];

  logic             start;
  logic             ones_busy, ones_done, zeros_busy, zeros_done;
  logic [CNT_W-1:0] ones_cnt, zeros_cnt;

  always_comb start = (state == S_IDLE) && frozen_s && !rst;

  wu_edge_encoder #(
    .N_TAPS(N_TAPS), .SEGMENTS(SEGMENTS), .CHUNKS(CHUNKS), .CHUNK_W(CHUNK_W),
    .COUNT_ONES(1'b1)
  ) u_ones (
    .clk, .rst, .start, .snap,
    .busy(ones_busy), .done(ones_done), .count(ones_cnt)
  );

  wu_edge_encoder #(
    .N_TAPS(N_TAPS), .SEGMENTS(SEGMENTS), .CHUNKS(CHUNKS), .CHUNK_W(CHUNK_W),
    .COUNT_ONES(1'b0)
  ) u_zeros (
    .clk, .rst, .start, .snap,
    .busy(zeros_busy), .done(zeros_done), .count(zeros_cnt)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      // arm toggles during reset so that the asynchronous clears downstream
      // see a rising edge whatever state they power up in.
      state <= S_REARM;
      arm   <= ~arm;
      ev    <= '0;
    end else begin
      unique case (state)
        S_IDLE:  if (start) state <= S_RUN;
        S_RUN: if (ones_done && zeros_done && !ones_busy && !zeros_busy) begin
          // Both runs are known: add them (first overhead cycle).
          ev.fine   <= FINE_W'(ones_cnt) + FINE_W'(zeros_cnt);
          ev.coarse <= coarse_tag;
          state     <= S_STORE;
        end
        S_STORE: begin
          arm   <= 1'b1;
          state <= S_REARM;
        end
        S_REARM: begin
          arm <= 1'b1;
          if (arm && !frozen_s) begin
            arm   <= 1'b0;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb ev_valid = (state == S_STORE);
  always_comb busy     = (state != S_IDLE);

  // The fine code must fit its field.
  initial assert (2 * N_TAPS < (1 << FINE_W))
    else $error("FINE_W too narrow for N_TAPS");
  // The tap pattern may only be read while it is frozen.
  a_snap_frozen: assert property (@(posedge clk) disable iff (rst)
    (state == S_RUN) |-> frozen_s);

endmodule
