// qiht_top -- streaming engine for quantized iterative hard thresholding.
//
// The engine solves y ~ Phi x for an s-sparse x by iterating
//     x' <- H_s( x' - gamma * Q(Phi)^T (Q(Phi) x' - Q(y)) )
// where Q(.) are low-precision stochastic quantizations of the measurement
// matrix and the measurements, gamma = 2^-gamma_shift is a fixed step and
// H_s keeps the s largest entries. Phi is too large to keep on chip, so it
// streams from main memory, one 64-byte line (K values) per cycle, while x
// and x' stay in on-chip memory. Lower precision packs more values into each
// line; at the same line rate an iteration takes proportionally less time.
//
// Datapath (per row m of Phi):
//   header line   -> y FIFO
//   Phi lines     -> dot product with x' (K multipliers, adder tree,
//                    accumulator)  and, unchanged, -> Phi FIFO
//   row complete  -> g_m = (Q(Phi_m)x' - y_m) >>> gamma_shift -> residual queue
//   replay        -> Phi FIFO lines * g_m (K multipliers), subtracted from x
//                    (K subtractors, read-modify-write of model memory x)
// The dot product of row m+1 overlaps with the replay of row m, so the
// stream runs at one line per cycle. After the last row: drain, then
// hard_threshold writes H_s(x) into x' and x. This follows the reference
// design's block diagram; the header-line stream layout, the residual queue,
// the FIFO depths, the saturation and the phase machine are this design's.
//
// Interface: configure cfg_* and pulse start. Stream lines with
// in_valid/in_ready (AXI-stream style; in_ready is low outside the epochs
// and when a FIFO is full). done rises after cfg_iters iterations; then x'
// can be read one K-wide word per address with rd_addr -> rd_data one cycle
// later. cfg_lines = N/K lines per row, cfg_rows = M rows, cfg_s = sparsity.
module qiht_top
#(
  parameter int unsigned K              = qiht_pkg::K,
  parameter int unsigned PHI_BITS       = qiht_pkg::PHI_BITS,
  parameter int unsigned Y_BITS         = qiht_pkg::Y_BITS,
  parameter int unsigned X_BITS         = qiht_pkg::X_BITS,
  parameter int unsigned ACC_BITS       = qiht_pkg::ACC_BITS,
  parameter int unsigned L_MAX          = qiht_pkg::L_MAX,
  parameter int unsigned PHI_FIFO_DEPTH = 2 * qiht_pkg::L_MAX,
  parameter int unsigned Y_FIFO_DEPTH   = 4,
  parameter int unsigned G_FIFO_DEPTH   = 4
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // configuration (hold while busy)
  input  logic                            start,
  input  logic [31:0]                     cfg_rows,
  input  logic [$clog2(L_MAX+1)-1:0]      cfg_lines,
  input  logic [15:0]                     cfg_iters,
  input  logic [31:0]                     cfg_s,
  input  logic [qiht_pkg::SHIFT_BITS-1:0]           cfg_y_shift,
  input  logic [qiht_pkg::SHIFT_BITS-1:0]           cfg_gamma_shift,
  // line stream from main memory
  input  logic                            in_valid,
  output logic                            in_ready,
  input  logic [K*PHI_BITS-1:0]           in_line,
  // status
  output qiht_pkg::phase_e                          phase,
  output logic [15:0]                     iter,
  output logic                            done,
  output logic [X_BITS-1:0]               last_thresh,
  output logic [31:0]                     last_kept,
  output logic                            sat_event,
  output logic [$clog2(PHI_FIFO_DEPTH+1)-1:0] phi_fifo_level,
  output logic [7:0]                      th_passes,
  // result read port (x'), valid outside the STREAM phase
  input  logic [$clog2(L_MAX)-1:0]        rd_addr,
  output logic [K*X_BITS-1:0]             rd_data
);
  localparam int unsigned AW = $clog2(L_MAX);
  localparam int unsigned LINE_W = K * PHI_BITS;
  localparam int unsigned WORD_W = K * X_BITS;

  // ---------------------------------------------------------------- control
  logic          acc_y, acc_phi, phi_last, clr_we, th_start, th_done, dp_idle;
  logic [AW-1:0] phi_idx, clr_addr;
  logic          phi_full, phi_empty, y_full, y_empty, g_empty, g_full;

  qiht_ctrl #(.L_MAX(L_MAX)) u_ctrl (
    .clk, .rst_n, .start,
    .rows(cfg_rows), .lines(cfg_lines), .iters(cfg_iters),
    .in_valid, .in_ready, .phi_full, .y_full,
    .acc_y, .acc_phi, .phi_idx, .phi_last,
    .clr_we, .clr_addr,
    .dp_idle, .th_start, .th_done,
    .phase, .iter, .done
  );

  // ---------------------------------------------------------------- memories
  logic [AW-1:0]     xp_raddr, x_raddr, x_waddr, xp_waddr;
  logic [WORD_W-1:0] xp_rdata, x_rdata, x_wdata, xp_wdata;
  logic              x_we, xp_we;

  model_ram #(.WORDS(L_MAX), .WIDTH(WORD_W)) u_xp_ram (
    .clk, .raddr(xp_raddr), .rdata(xp_rdata), .we(xp_we), .waddr(xp_waddr), .wdata(xp_wdata)
  );
  model_ram #(.WORDS(L_MAX), .WIDTH(WORD_W)) u_x_ram (
    .clk, .raddr(x_raddr), .rdata(x_rdata), .we(x_we), .waddr(x_waddr), .wdata(x_wdata)
  );

  assign xp_raddr = (phase == qiht_pkg::PH_STREAM) ? phi_idx : rd_addr;
  assign rd_data  = xp_rdata;

  // ---------------------------------------------------------------- FIFOs
  logic [LINE_W-1:0]  phi_rdata;
  logic [Y_BITS-1:0]  y_rdata;
  logic               phi_pop, y_pop;
  logic [X_BITS-1:0]  g_rdata;
  logic [$clog2(Y_FIFO_DEPTH+1)-1:0]   y_count;
  logic [$clog2(G_FIFO_DEPTH+1)-1:0]   g_count;

  sync_fifo #(.WIDTH(LINE_W), .DEPTH(PHI_FIFO_DEPTH)) u_phi_fifo (
    .clk, .rst_n, .push(acc_phi), .wdata(in_line), .pop(phi_pop), .rdata(phi_rdata),
    .empty(phi_empty), .full(phi_full), .count(phi_fifo_level)
  );
  sync_fifo #(.WIDTH(Y_BITS), .DEPTH(Y_FIFO_DEPTH)) u_y_fifo (
    .clk, .rst_n, .push(acc_y), .wdata(in_line[Y_BITS-1:0]), .pop(y_pop), .rdata(y_rdata),
    .empty(y_empty), .full(y_full), .count(y_count)
  );

  // ---------------------------------------------------------------- dot product
  logic               d1_valid, d1_last;
  logic [LINE_W-1:0]  d1_line;
  logic               dot_valid, dp_busy;
  logic signed [ACC_BITS-1:0] dot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d1_valid <= 1'b0;
      d1_last  <= 1'b0;
    end else begin
      d1_valid <= acc_phi;
      d1_last  <= acc_phi && phi_last;
    end
  end
  always_ff @(posedge clk) if (acc_phi) d1_line <= in_line;

  dot_product #(.K(K), .PHI_BITS(PHI_BITS), .X_BITS(X_BITS), .ACC_BITS(ACC_BITS)) u_dot (
    .clk, .rst_n,
    .in_valid(d1_valid), .in_last(d1_last), .phi(d1_line), .xp(xp_rdata),
    .out_valid(dot_valid), .out_dot(dot), .busy(dp_busy)
  );

  // ---------------------------------------------------------------- gradient
  logic                       g_valid, p_valid, g_take;
  logic signed [X_BITS-1:0]   g, g_cur;
  logic [K*(PHI_BITS+X_BITS)-1:0] prod;

  assign y_pop = dot_valid;

  gradient_calc #(.K(K), .PHI_BITS(PHI_BITS), .Y_BITS(Y_BITS), .X_BITS(X_BITS),
                  .ACC_BITS(ACC_BITS)) u_grad (
    .clk, .rst_n, .y_shift(cfg_y_shift), .gamma_shift(cfg_gamma_shift),
    .s_valid(dot_valid), .dot, .y(y_rdata), .g_valid, .g,
    .v_valid(phi_pop), .phi(phi_rdata), .g_cur, .p_valid, .prod(prod)
  );

  sync_fifo #(.WIDTH(X_BITS), .DEPTH(G_FIFO_DEPTH)) u_g_fifo (
    .clk, .rst_n, .push(g_valid), .wdata(g), .pop(g_take), .rdata(g_rdata),
    .empty(g_empty), .full(g_full), .count(g_count)
  );

  // ---------------------------------------------------------------- model update
  logic [AW-1:0]     up_raddr, up_waddr;
  logic [WORD_W-1:0] up_wdata;
  logic              up_we, up_busy;
  logic [K-1:0]      sat_flags;

  model_update #(.K(K), .PHI_BITS(PHI_BITS), .X_BITS(X_BITS), .L_MAX(L_MAX)) u_upd (
    .clk, .rst_n, .lines(cfg_lines),
    .g_avail(!g_empty), .g_in(g_rdata), .g_take, .g_cur,
    .phi_empty, .phi_pop,
    .p_valid, .prod(prod),
    .x_raddr(up_raddr), .x_rdata(x_rdata), .x_we(up_we), .x_waddr(up_waddr), .x_wdata(up_wdata),
    .busy(up_busy), .sat_flags
  );
  assign sat_event = |sat_flags;

  // ---------------------------------------------------------------- thresholding
  logic [AW-1:0]     th_raddr, th_waddr;
  logic [WORD_W-1:0] th_wdata;
  logic              th_we, th_busy;

  hard_threshold #(.K(K), .X_BITS(X_BITS), .L_MAX(L_MAX)) u_th (
    .clk, .rst_n, .start(th_start), .lines(cfg_lines), .s(cfg_s),
    .x_raddr(th_raddr), .x_rdata(x_rdata), .wr_en(th_we), .wr_addr(th_waddr), .wr_data(th_wdata),
    .busy(th_busy), .done(th_done), .thresh(last_thresh), .kept(last_kept), .passes(th_passes)
  );

  // ---------------------------------------------------------------- memory port muxes
  assign x_raddr  = th_busy ? th_raddr : up_raddr;
  always_comb begin
    if (clr_we) begin
      x_we = 1'b1;  x_waddr = clr_addr;  x_wdata = '0;
      xp_we = 1'b1; xp_waddr = clr_addr; xp_wdata = '0;
    end else if (th_busy) begin
      x_we = th_we;  x_waddr = th_waddr;  x_wdata = th_wdata;
      xp_we = th_we; xp_waddr = th_waddr; xp_wdata = th_wdata;
    end else begin
      x_we = up_we;  x_waddr = up_waddr;  x_wdata = up_wdata;
      xp_we = 1'b0;  xp_waddr = up_waddr; xp_wdata = up_wdata;
    end
  end

  assign dp_idle = phi_empty && y_empty && g_empty && !d1_valid && !dp_busy
                && !g_valid && !up_busy;

  // ---------------------------------------------------------------- checks
  a_y_ready:  assert property (@(posedge clk) disable iff (!rst_n) dot_valid |-> !y_empty)
    else $error("qiht_top: row finished without its measurement");
  a_g_room:   assert property (@(posedge clk) disable iff (!rst_n) g_valid |-> !g_full)
    else $error("qiht_top: residual queue overflow");
  a_no_rmw_hazard: assert property (@(posedge clk) disable iff (!rst_n)
                     (x_we && phi_pop) |-> (x_waddr != x_raddr))
    else $error("qiht_top: model read of a word being written");
endmodule
