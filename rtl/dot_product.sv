// dot_product -- K-lane dot product of a Phi row with the thresholded model x'.
//
// This is the "Dot product" stage of the engine. Each cycle it takes one
// memory line of K quantized Phi values and the K matching entries of x',
// multiplies them in K multipliers, sums the K products in a pipelined adder
// tree and adds the tree's sum to a running accumulator. When the last line
// of a row has passed, the accumulator holds Q(Phi_m) x' for that row, which
// is handed on with out_valid for one cycle; the accumulator restarts at zero
// for the next row. K multipliers, K adders and the feedback accumulator are
// the reference design's structure.
//
// Timing: one line per cycle, no stalls. out_valid follows the in_valid of a
// row's last line by 2 + log2(K) cycles (product register, log2(K) tree
// levels, accumulator). busy is high while any line is inside.
// Arithmetic is exact: products are PHI_BITS+X_BITS wide, the tree adds
// log2(K) bits and ACC_BITS must cover a whole row (this design's choice).
module dot_product #(
  parameter int unsigned K        = qiht_pkg::K,
  parameter int unsigned PHI_BITS = qiht_pkg::PHI_BITS,
  parameter int unsigned X_BITS   = qiht_pkg::X_BITS,
  parameter int unsigned ACC_BITS = qiht_pkg::ACC_BITS
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic                                in_last,
  input  logic signed [K-1:0][PHI_BITS-1:0]   phi,
  input  logic signed [K-1:0][X_BITS-1:0]     xp,
  output logic                                out_valid,
  output logic signed [ACC_BITS-1:0]          out_dot,
  output logic                                busy
);
  localparam int unsigned PW = PHI_BITS + X_BITS;
  localparam int unsigned TW = PW + $clog2(K);

  // K multipliers, registered
  logic signed [K-1:0][PW-1:0] prod;
  logic                        p_valid, p_last;

  always_ff @(posedge clk) begin
    for (int i = 0; i < K; i++)
      prod[i] <= PW'(signed'(phi[i])) * PW'(signed'(xp[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      p_last  <= 1'b0;
    end else begin
      p_valid <= in_valid;
      p_last  <= in_last;
    end
  end

  // K-input adder tree
  logic                 t_valid, t_last;
  logic signed [TW-1:0] t_sum;

  adder_tree #(.N(K), .IN_W(PW)) u_tree (
    .clk, .rst_n,
    .in_valid (p_valid),
    .in_last  (p_last),
    .in_data  (prod),
    .out_valid(t_valid),
    .out_last (t_last),
    .out_sum  (t_sum)
  );

  // accumulator over the lines of one row
  logic signed [ACC_BITS-1:0] acc;
  logic signed [ACC_BITS-1:0] acc_next;
  logic [$clog2(K)+2:0]       inflight;

  assign acc_next = acc + ACC_BITS'(t_sum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_dot   <= '0;
    end else begin
      out_valid <= t_valid && t_last;
      if (t_valid) begin
        if (t_last) begin
          out_dot <= acc_next;
          acc     <= '0;
        end else begin
          acc     <= acc_next;
        end
      end
    end
  end

  // lines between input and accumulator (for the end-of-epoch drain)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + ($clog2(K)+3)'(in_valid) - ($clog2(K)+3)'(t_valid);
  end

  assign busy = (inflight != 0) || out_valid;
endmodule
