// wu_tdc_pkg: constants and types shared by the wave union TDC.
//
// The delay line has 320 taps (137 CCU2 carry cells in the main line plus 23
// in the launcher, two taps per cell). The encoder splits it into 4 interleaved
// segments (combs) of 10 chunks of 8 bits each, so one side of the encoder
// needs at most 4*10 chunk cycles plus 2 cycles of overhead. These numbers
// follow the paper. The fine code width (10 bits, enough for 2*320) and the
// coarse counter width (32 bits) are this design's choice.
`timescale 1ps/1ps
package wu_tdc_pkg;

  localparam int unsigned N_CHANNELS = 16;   // TDC channels
  localparam int unsigned N_TAPS     = 320;  // delay line taps seen by the encoder
  localparam int unsigned SEGMENTS   = 4;    // interleaved combs (A,B,C,D)
  localparam int unsigned CHUNKS     = 10;   // chunks per segment
  localparam int unsigned CHUNK_W    = 8;    // bits per chunk encoder
  localparam int unsigned OVERHEAD_K = 2;    // add + store cycles after the chunks
  localparam int unsigned FINE_W     = 10;   // fine code width
  localparam int unsigned COARSE_W   = 32;   // coarse counter width
  localparam int unsigned FIFO_DEPTH = 16;   // events buffered per channel

  // One time tag: coarse = reference clock edge that stopped the TDC,
  // fine = wave union code (sum of the two edge distances).
  typedef struct packed {
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } tdc_event_t;

endpackage
