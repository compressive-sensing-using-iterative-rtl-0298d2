// model_update -- replays a Phi row and applies x <- x - g * Q(Phi_m).
//
// This is the "Model update" stage of the engine. The model x in on-chip
// memory accumulates the whole gradient of an epoch; it is thresholded only
// after every row has been seen (x' stays fixed meanwhile), as the reference
// design does for IHT instead of updating after each mini-batch.
//
// Operation: when a scaled residual g of a row is waiting (g_avail) and the
// engine is idle, it takes g (g_take) and then, for line l = 0 .. lines-1,
// pops the row's line from the Phi FIFO (phi_pop, one per cycle whenever the
// FIFO is not empty) and reads model word l (x_raddr). One cycle later the
// gradient multipliers deliver the K products (p_valid, prod) together with
// the old word (x_rdata); K subtractors form x - prod, saturated to X_BITS,
// and write it back to word l (x_we). Full rate: one line per cycle.
// The K subtractors are the reference design's; the sequencing, the one-cycle
// read-modify-write and the saturation are this design's choice.
module model_update #(
  parameter int unsigned K        = qiht_pkg::K,
  parameter int unsigned PHI_BITS = qiht_pkg::PHI_BITS,
  parameter int unsigned X_BITS   = qiht_pkg::X_BITS,
  parameter int unsigned L_MAX    = qiht_pkg::L_MAX
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  input  logic [$clog2(L_MAX+1)-1:0]               lines,
  // residual queue
  input  logic                                     g_avail,
  input  logic signed [X_BITS-1:0]                 g_in,
  output logic                                     g_take,
  output logic signed [X_BITS-1:0]                 g_cur,
  // Phi FIFO
  input  logic                                     phi_empty,
  output logic                                     phi_pop,
  // products from the gradient multipliers
  input  logic                                     p_valid,
  input  logic signed [K-1:0][PHI_BITS+X_BITS-1:0] prod,
  // model memory x
  output logic [$clog2(L_MAX)-1:0]                 x_raddr,
  input  logic signed [K-1:0][X_BITS-1:0]          x_rdata,
  output logic                                     x_we,
  output logic [$clog2(L_MAX)-1:0]                 x_waddr,
  output logic signed [K-1:0][X_BITS-1:0]          x_wdata,
  output logic                                     busy,
  output logic [K-1:0]                             sat_flags
);
  localparam int unsigned AW = $clog2(L_MAX);
  localparam int unsigned PW = PHI_BITS + X_BITS;
  localparam logic signed [PW:0] XMAX = (PW+1)'((64'sd1 <<< (X_BITS - 1)) - 64'sd1);
  localparam logic signed [PW:0] XMIN = -(PW+1)'(64'sd1 <<< (X_BITS - 1));

  logic                          active;
  logic [$clog2(L_MAX+1)-1:0]    line;
  logic [AW-1:0]                 addr_q;

  assign g_take  = !active && g_avail;
  assign phi_pop = active && !phi_empty;
  assign x_raddr = AW'(line);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      line   <= '0;
      g_cur  <= '0;
      addr_q <= '0;
    end else begin
      if (g_take) begin
        active <= 1'b1;
        line   <= '0;
        g_cur  <= g_in;
      end else if (phi_pop) begin
        addr_q <= AW'(line);
        if (line == lines - 1'b1) begin
          active <= 1'b0;
          line   <= '0;
        end else begin
          line <= line + 1'b1;
        end
      end
    end
  end

  // K subtractors with saturation
  always_comb begin
    for (int i = 0; i < K; i++) begin
      logic signed [PW:0] d;
      d = (PW+1)'(signed'(x_rdata[i])) - (PW+1)'(signed'(prod[i]));
      sat_flags[i] = 1'b0;
      if (d > XMAX) begin
        x_wdata[i]   = X_BITS'(XMAX);
        sat_flags[i] = p_valid;
      end else if (d < XMIN) begin
        x_wdata[i]   = X_BITS'(XMIN);
        sat_flags[i] = p_valid;
      end else begin
        x_wdata[i]   = X_BITS'(d);
      end
    end
  end

  assign x_we    = p_valid;
  assign x_waddr = addr_q;
  assign busy    = active || p_valid;

  a_products_follow_pops: assert property (@(posedge clk) disable iff (!rst_n) phi_pop |=> p_valid)
    else $error("model_update: product missing after a pop");
endmodule
