// qiht_pkg -- constants and types shared by the QIHT streaming engine.
//
// The engine recovers a sparse vector x from quantized measurements
// y = Phi x by iterative hard thresholding. Phi and y are
// streamed from main memory in 64-byte lines (512 bits). One line carries
// K quantized Phi values of PHI_BITS bits each. K = 128 and the 64 B line
// are the figures of the reference design; PHI_BITS = 512/128 = 4 follows
// from them. The model x is a signed X_BITS fixed-point vector held on chip,
// one K-wide word per line of a Phi row, so N_MAX/K words.
//
// Number formats (fixed point, see the README):
//   * Phi and y lanes are signed integers j in [-2^(b-2), 2^(b-2)] standing
//     for the level j / 2^(b-2) of an odd-level b-bit quantizer.
//   * x, x' are signed X_BITS integers with an implicit binary point.
//   * Dot products are kept in ACC_BITS, wide enough that a full row of
//     N_MAX products cannot overflow.
package qiht_pkg;

  // 64 B memory line
  localparam int unsigned LINE_BITS = 512;
  // values per line = multipliers in the dot product and gradient stages
  localparam int unsigned K         = 128;
  localparam int unsigned PHI_BITS  = LINE_BITS / K;
  // measurement width (8-bit observations in the evaluated configurations)
  localparam int unsigned Y_BITS    = 8;
  // model word width
  localparam int unsigned X_BITS    = 32;
  // dot-product accumulator width
  localparam int unsigned ACC_BITS  = 64;
  // largest signal length held on chip (256 x 256 sky image)
  localparam int unsigned N_MAX     = 65536;
  // largest number of lines per Phi row
  localparam int unsigned L_MAX     = N_MAX / K;
  // width of shift amounts (y alignment and step size gamma = 2^-shift)
  localparam int unsigned SHIFT_BITS = 6;

  // engine phases
  typedef enum logic [2:0] {
    PH_IDLE   = 3'd0,   // waiting for start
    PH_CLEAR  = 3'd1,   // x = x' = 0
    PH_STREAM = 3'd2,   // one epoch: all rows of Phi and y stream in
    PH_DRAIN  = 3'd3,   // last row's update still in flight
    PH_THRESH = 3'd4,   // binary search for the threshold, then x' = H_s(x)
    PH_DONE   = 3'd5    // n* iterations finished, x' readable
  } phase_e;

endpackage
