// adder_tree -- pipelined binary tree that sums N signed inputs.
//
// The reduction half of the dot product in the reference design: the K
// products of one line are added pairwise, level by level, into one sum.
// Every level is registered, so a new set of N inputs is accepted every cycle
// and the sum appears log2(N) cycles later. The output is log2(N) bits wider
// than an input, so the sum never overflows. valid and last travel alongside
// the data. N must be a power of two; the register per level is this design's
// choice.
module adder_tree #(
  parameter int unsigned N    = 128,
  parameter int unsigned IN_W = 37
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  input  logic                                   in_last,
  input  logic signed [N-1:0][IN_W-1:0]          in_data,
  output logic                                   out_valid,
  output logic                                   out_last,
  output logic signed [IN_W+$clog2(N)-1:0]       out_sum
);
  localparam int unsigned LEVELS = $clog2(N);
  localparam int unsigned OW     = IN_W + LEVELS;

  initial assert ((1 << LEVELS) == N) else $error("adder_tree: N must be a power of two");

  // level 0: sign-extended inputs
  logic signed [OW-1:0] lvl0 [N];
  for (genvar i = 0; i < N; i++) begin : g_in
    assign lvl0[i] = OW'(signed'(in_data[i]));
  end

  logic [LEVELS:0] vpipe, lpipe;
  assign vpipe[0] = in_valid;
  assign lpipe[0] = in_last;

  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    logic signed [OW-1:0] s [N >> l];
    for (genvar i = 0; i < (N >> l); i++) begin : g_add
      if (l == 1) begin : g_first
        always_ff @(posedge clk) s[i] <= lvl0[2*i] + lvl0[2*i+1];
      end else begin : g_rest
        always_ff @(posedge clk) s[i] <= g_lvl[l-1].s[2*i] + g_lvl[l-1].s[2*i+1];
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vpipe[l] <= 1'b0;
        lpipe[l] <= 1'b0;
      end else begin
        vpipe[l] <= vpipe[l-1];
        lpipe[l] <= lpipe[l-1];
      end
    end
  end

  assign out_valid = vpipe[LEVELS];
  assign out_last  = lpipe[LEVELS];
  assign out_sum   = g_lvl[LEVELS].s[0];
endmodule
