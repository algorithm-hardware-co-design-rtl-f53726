// dcn_pkg: constants and types shared by the depthwise deformable-convolution
// engine.
//
// The engine computes a 3x3 depthwise convolution whose nine taps sit on a
// square around the output pixel.  The square's half-side d (the "offset",
// one per output pixel) is rounded to an integer and bounded to [0, N_BOUND],
// so every sample lies within N_BOUND rows of the output row and a circular
// buffer of 2*N_BOUND+1 lines holds every input the engine can ask for.
//
// Sizes that follow the source design: N_BOUND = 7, 15 lines, 16 channel
// lanes x 9 taps of multipliers, layers up to 64 x 64 x 256.  Data widths
// (8-bit activations and weights, 8-bit offsets with 4 fraction bits,
// 20-bit sums) are choices of this implementation.
package dcn_pkg;

  // Offset bound and line buffer depth
  parameter int unsigned N_BOUND  = 7;
  parameter int unsigned LINES    = 2 * N_BOUND + 1;

  // Compute array: PC channel lanes x TAPS taps
  parameter int unsigned PC       = 16;
  parameter int unsigned KSZ      = 3;
  parameter int unsigned TAPS     = KSZ * KSZ;
  parameter int unsigned NPORTS   = 3;

  // Largest layer
  parameter int unsigned H_MAX    = 64;
  parameter int unsigned W_MAX    = 64;
  parameter int unsigned C_MAX    = 256;

  // Number formats
  parameter int unsigned DATA_W   = 8;                  // activation / weight
  parameter int unsigned ACC_W    = 2 * DATA_W + 4;     // exact sum of 9 products
  parameter int unsigned OFF_IN_W = 8;                  // offset as received
  parameter int unsigned OFF_FRAC = 4;                  // its fraction bits
  parameter int unsigned OFF_W    = $clog2(N_BOUND + 1);// stored offset

  // Row counters run over all channel groups of a layer
  parameter int unsigned ROWCNT_W = 16;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [OFF_W-1:0]         off_t;

  // One pixel of PC channels, as stored in a line
  typedef data_t [PC-1:0]           pixel_t;
  // Nine samples of PC channels, tap index 3*i+j (i = row, j = column)
  typedef pixel_t [TAPS-1:0]        window_t;
  // Nine weights of one channel and the weights of one channel group
  typedef data_t [TAPS-1:0]         wchan_t;
  typedef wchan_t [PC-1:0]          wgroup_t;
  // Results of one channel group at one pixel
  typedef acc_t [PC-1:0]            result_t;

endpackage
