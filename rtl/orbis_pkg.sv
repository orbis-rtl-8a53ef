// orbis_pkg: number formats shared by the quantization engine and the
// DATM (distribution-aware token matching) engine.
//
// Activations arrive as signed ACT_W-bit fixed-point words. The quantization
// engine turns them into signed Q_W-bit codes per channel (4 bits, as in the
// paper), with a per-channel scale factor carried as the channel's largest
// magnitude (the real step is amax/QMAX, the common 1/QMAX is dropped because
// it scales every distance alike). Reciprocals are fixed point with RECIP_P
// fraction bits. Distances are unsigned DIST_W-bit sums of squares.
// Everything except the 4-bit code width is this design's own choice.
package orbis_pkg;
  localparam int ACT_W   = 16;  // activation word (assumed)
  localparam int Q_W     = 4;   // quantized code width (paper: 4-bit)
  localparam int QMAX    = 7;   // symmetric code range is -QMAX..QMAX
  localparam int SCALE_W = 16;  // per-channel scale word (channel amax)
  localparam int RECIP_P = 24;  // fraction bits of reciprocals
  localparam int RECIP_W = RECIP_P + 1;
  localparam int DIST_W  = 64;  // distance / loss accumulator width
  localparam int RATIO_W = 16;  // top-k ratio r is ratio/2^RATIO_W
endpackage
