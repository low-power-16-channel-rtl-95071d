// wu_edge_encoder: one side of the wave union encoder (controller, segment
// multiplexer, chunk encoder and accumulator).
//
// The frozen tap pattern is read as SEGMENTS interleaved combs: segment s holds
// taps s, s+SEGMENTS, s+2*SEGMENTS, ... Each comb is cut into CHUNKS linear
// chunks of CHUNK_W bits. Starting at one end of the line, the controller steps
// a multiplexer through the chunks of segment 0, then segment 1, and so on, one
// chunk per clock. The chunk encoder counts the run of ones (COUNT_ONES = 1,
// starting at tap 0, the left end) or the run of zeros (COUNT_ONES = 0, starting
// at tap N_TAPS-1, the right end). The count is added to the accumulator. A
// full chunk means the edge lies further on, so the controller moves to the
// next chunk. A partial chunk means the edge has been found, so it moves to the
// next segment. A bubble near a transition falls in another comb and cannot cut
// a comb's run short. The result is the sum of the four run lengths, which is
// the edge's distance from that end counted in taps.
//
// Timing: start is taken in any cycle where busy is low. Chunks are processed
// on the following edges, one per cycle: at least SEGMENTS, at most
// SEGMENTS*CHUNKS (40). done rises with the last chunk and stays high, and
// count is valid, until the next start.
//
// The combs, the chunks, the 8-bit chunk encoder, the scan from each end and
// the early move to the next segment all follow the paper. The zeros side is
// built by inverting and reversing the line and reusing the ones logic; this is
// this design's choice and gives the same counts.
`timescale 1ps/1ps
module wu_edge_encoder #(
  parameter int unsigned N_TAPS     = wu_tdc_pkg::N_TAPS,
  parameter int unsigned SEGMENTS   = wu_tdc_pkg::SEGMENTS,
  parameter int unsigned CHUNKS     = wu_tdc_pkg::CHUNKS,
  parameter int unsigned CHUNK_W    = wu_tdc_pkg::CHUNK_W,
  parameter bit          COUNT_ONES = 1'b1,
  parameter int unsigned CNT_W      = $clog2(N_TAPS + 1)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic [N_TAPS-1:0] snap,
  output logic              busy,
  output logic              done,
  output logic [CNT_W-1:0]  count
);

  localparam int unsigned SEG_W   = (SEGMENTS > 1) ? $clog2(SEGMENTS) : 1;
  localparam int unsigned CHK_W   = (CHUNKS > 1) ? $clog2(CHUNKS) : 1;
  localparam int unsigned CCNT_W  = $clog2(CHUNK_W + 1);

  // The line as this side scans it: bit 0 is where the scan begins, and the
  // run being measured is a run of ones.
  logic [N_TAPS-1:0] line;
  always_comb begin
    for (int i = 0; i < N_TAPS; i++)
      line[i] = COUNT_ONES ? snap[i] : ~snap[N_TAPS-1-i];
  end

  logic [SEG_W-1:0]   seg;
  logic [CHK_W-1:0]   chk;
  logic [CHUNK_W-1:0] chunk;
  logic [CCNT_W-1:0]  run;

  // Segment/chunk multiplexer: bit b of chunk chk of comb seg.
  always_comb begin
    for (int b = 0; b < CHUNK_W; b++)
      chunk[b] = line[SEGMENTS * (int'(chk) * CHUNK_W + b) + int'(seg)];
  end

  // Chunk encoder: length of the run of ones starting at bit 0.
  always_comb begin
    logic stop;
    stop = 1'b0;
    run  = '0;
    for (int b = 0; b < CHUNK_W; b++) begin
      if (!chunk[b]) stop = 1'b1;
      if (!stop)     run  = run + 1'b1;
    end
  end

  logic last_chunk, last_seg;
  always_comb begin
    last_chunk = (int'(chk) == CHUNKS - 1) || (int'(run) != CHUNK_W);
    last_seg   = (int'(seg) == SEGMENTS - 1);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      seg   <= '0;
      chk   <= '0;
      count <= '0;
    end else if (!busy) begin
      if (start) begin
        busy  <= 1'b1;
        done  <= 1'b0;
        seg   <= '0;
        chk   <= '0;
        count <= '0;
      end
    end else begin
      count <= count + CNT_W'(run);
      if (!last_chunk) begin
        chk <= chk + 1'b1;
      end else begin
        chk <= '0;
        if (last_seg) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          seg <= seg + 1'b1;
        end
      end
    end
  end

endmodule
