// gradient_calc -- residual, step-size shift and the K gradient multipliers.
//
// This is the "Gradient calculation" stage of the engine. It has two
// independent parts.
//
// Scalar part: when a row's dot product d = Q(Phi_m) x' arrives (s_valid),
// the row's measurement y_m (from the y FIFO) is aligned to the accumulator's
// binary point by a left shift of y_shift, subtracted from d, and the residual
// is multiplied by the step size gamma = 2^-gamma_shift as an arithmetic right
// shift:  g = (d - (y_m << y_shift)) >>> gamma_shift.  g is saturated to
// X_BITS and appears one cycle later with g_valid. Subtractor and bit-shift
// step follow the reference design; the y alignment shift and the
// saturation are this design's choices.
//
// Vector part: for every replayed Phi line (v_valid) it multiplies the K Phi
// values by the current row's g in K multipliers. The products appear one
// cycle later with p_valid and are PHI_BITS+X_BITS bits wide (exact).
module gradient_calc #(
  parameter int unsigned K          = qiht_pkg::K,
  parameter int unsigned PHI_BITS   = qiht_pkg::PHI_BITS,
  parameter int unsigned Y_BITS     = qiht_pkg::Y_BITS,
  parameter int unsigned X_BITS     = qiht_pkg::X_BITS,
  parameter int unsigned ACC_BITS   = qiht_pkg::ACC_BITS,
  parameter int unsigned SHIFT_BITS = qiht_pkg::SHIFT_BITS
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [SHIFT_BITS-1:0]                 y_shift,
  input  logic [SHIFT_BITS-1:0]                 gamma_shift,
  // scalar part
  input  logic                                  s_valid,
  input  logic signed [ACC_BITS-1:0]            dot,
  input  logic signed [Y_BITS-1:0]              y,
  output logic                                  g_valid,
  output logic signed [X_BITS-1:0]              g,
  // vector part
  input  logic                                  v_valid,
  input  logic signed [K-1:0][PHI_BITS-1:0]     phi,
  input  logic signed [X_BITS-1:0]              g_cur,
  output logic                                  p_valid,
  output logic signed [K-1:0][PHI_BITS+X_BITS-1:0] prod
);
  localparam int unsigned PW = PHI_BITS + X_BITS;
  localparam logic signed [ACC_BITS-1:0] GMAX = ACC_BITS'((64'sd1 <<< (X_BITS - 1)) - 64'sd1);
  localparam logic signed [ACC_BITS-1:0] GMIN = -ACC_BITS'(64'sd1 <<< (X_BITS - 1));

  logic signed [ACC_BITS-1:0] y_al, resid, scaled;

  always_comb begin
    y_al   = ACC_BITS'(y) <<< y_shift;
    resid  = dot - y_al;
    scaled = resid >>> gamma_shift;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_valid <= 1'b0;
      g       <= '0;
      p_valid <= 1'b0;
    end else begin
      g_valid <= s_valid;
      if (s_valid) begin
        if (scaled > GMAX)      g <= X_BITS'(GMAX);
        else if (scaled < GMIN) g <= X_BITS'(GMIN);
        else                    g <= X_BITS'(scaled);
      end
      p_valid <= v_valid;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < K; i++)
      prod[i] <= PW'(signed'(phi[i])) * PW'(g_cur);
  end
endmodule
