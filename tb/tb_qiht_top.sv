// tb_qiht_top -- end-to-end test of the QIHT engine at reduced size.
//
// K = 8 lanes of 4-bit Phi, 16 lines per row at most (N <= 128). A hidden
// sparse signal x_true and a real-valued Phi in [-1,1] are drawn; every
// iteration streams a fresh stochastic-rounding realization of Phi and y
// (odd level count: j / 2^(b-2), j in [-2^(b-2), 2^(b-2)]), as the algorithm
// prescribes. A plain integer reference model of
//     x' <- H_s(x' - ((Q(Phi) x' - (y << ys)) >>> gs) * Q(Phi))   (saturating)
// predicts x', the threshold and the number of kept entries, which are
// compared with the engine's result after the last iteration.
//
// Cases: (1) 16 lines per row, random source bubbles, Phi FIFO the size of a
// row, so the FIFO fills and back-pressures the stream; (2) 8 lines per row
// at full rate: the epoch must take exactly rows*(lines+1) cycles, i.e. one
// 64 B line per cycle; (3) a huge step that drives the model into
// saturation. Each mechanism is counted and must occur at least once.
module tb_qiht_top;
  localparam int K = 8, PB = 4, YB = 8, XB = 32, AB = 64, LMAX = 16;
  localparam int NMAX = K * LMAX;
  localparam int MMAX = 12, ITMAX = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 start = 0;
  logic [31:0]          cfg_rows, cfg_s;
  logic [4:0]           cfg_lines;
  logic [15:0]          cfg_iters;
  logic [5:0]           cfg_y_shift, cfg_gamma_shift;
  logic                 in_valid = 0, in_ready;
  logic [K*PB-1:0]      in_line = '0;
  qiht_pkg::phase_e     phase;
  logic [15:0]          iter;
  logic                 done, sat_event;
  logic [XB-1:0]        last_thresh;
  logic [31:0]          last_kept;
  logic [4:0]           phi_level;
  logic [7:0]           th_passes;
  logic [3:0]           rd_addr = '0;
  logic [K*XB-1:0]      rd_data;

  qiht_top #(.K(K), .PHI_BITS(PB), .Y_BITS(YB), .X_BITS(XB), .ACC_BITS(AB), .L_MAX(LMAX),
             .PHI_FIFO_DEPTH(LMAX)) dut (
    .clk, .rst_n, .start, .cfg_rows, .cfg_lines, .cfg_iters, .cfg_s,
    .cfg_y_shift, .cfg_gamma_shift, .in_valid, .in_ready, .in_line,
    .phase, .iter, .done, .last_thresh, .last_kept, .sat_event,
    .phi_fifo_level(phi_level), .th_passes, .rd_addr, .rd_data
  );

  int checks = 0, failures = 0;
  int n_fifo_stall = 0, n_thresh_stall = 0, n_bubble = 0, n_overlap = 0, n_sat = 0;
  int n_iter_done = 0, n_full_rate = 0, n_restart = 0;

  // data
  real phi_r [MMAX][NMAX];
  real y_r   [MMAX];
  int  phi_q [ITMAX][MMAX][NMAX];
  int  y_q   [ITMAX][MMAX];
  longint xr [NMAX], xpr [NMAX];
  longint ref_thresh, ref_kept;

  function automatic real urand();
    return real'($urandom) / 4294967296.0;
  endfunction

  // stochastic rounding of v in [-1,1] to j / 2^(b-2)
  function automatic int squant(real v, int b);
    real sc = real'(1 << (b - 2));
    real t = v * sc;
    int lo = $rtoi(t + 1000.0) - 1000;   // floor
    if (urand() < (t - real'(lo))) return lo + 1;
    return lo;
  endfunction

  function automatic longint sat32(longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  function automatic longint absl(longint v);
    return v < 0 ? -v : v;
  endfunction

  // independent model: straightforward loops, threshold via sorting
  task automatic reference(int M, int N, int its, int s, int ys, int gs);
    longint mags [$];
    for (int i = 0; i < N; i++) begin xr[i] = 0; xpr[i] = 0; end
    for (int it = 0; it < its; it++) begin
      for (int m = 0; m < M; m++) begin
        longint d = 0, g;
        for (int i = 0; i < N; i++) d += longint'(phi_q[it][m][i]) * xpr[i];
        g = sat32((d - (longint'(y_q[it][m]) <<< ys)) >>> gs);
        for (int i = 0; i < N; i++) xr[i] = sat32(xr[i] - longint'(phi_q[it][m][i]) * g);
      end
      mags.delete();
      for (int i = 0; i < N; i++) mags.push_back(absl(xr[i]));
      mags.rsort();
      ref_thresh = (s < N) ? mags[s] : 0;
      ref_kept = 0;
      for (int i = 0; i < N; i++) begin
        xpr[i] = (absl(xr[i]) > ref_thresh) ? xr[i] : 0;
        xr[i] = xpr[i];
        if (xpr[i] != 0) ref_kept++;
      end
    end
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // one full run of the engine
  task automatic run_case(int L, int M, int its, int s, int ys, int gs, int bubble_pct,
                          real scale, bit check_rate);
    int N = K * L;
    int stream_cycles;
    int sparse_idx [4];
    real xt [NMAX];
    // problem: Phi real in [-1,1], x_true 4-sparse, y = Phi x_true / N scaled into [-1,1]
    for (int i = 0; i < N; i++) xt[i] = 0.0;
    for (int k = 0; k < 4; k++) begin
      sparse_idx[k] = $urandom_range(N - 1);
      xt[sparse_idx[k]] = (($urandom & 1) != 0) ? 0.9 : -0.9;
    end
    for (int m = 0; m < M; m++) begin
      real acc = 0.0;
      for (int i = 0; i < N; i++) begin
        phi_r[m][i] = 2.0 * urand() - 1.0;
        acc += phi_r[m][i] * xt[i];
      end
      y_r[m] = acc / 4.0;
      if (y_r[m] > 1.0) y_r[m] = 1.0;
      if (y_r[m] < -1.0) y_r[m] = -1.0;
    end
    for (int it = 0; it < its; it++)
      for (int m = 0; m < M; m++) begin
        for (int i = 0; i < N; i++) phi_q[it][m][i] = squant(phi_r[m][i] * scale, PB);
        y_q[it][m] = squant(y_r[m], YB);
      end
    reference(M, N, its, s, ys, gs);

    cfg_rows = M; cfg_lines = 5'(L); cfg_iters = 16'(its); cfg_s = s;
    cfg_y_shift = 6'(ys); cfg_gamma_shift = 6'(gs);
    @(posedge clk);
    if (phase == qiht_pkg::PH_DONE) n_restart++;
    start <= 1;
    @(posedge clk);
    start <= 0;

    // producer
    for (int it = 0; it < its; it++) begin
      stream_cycles = 0;
      for (int m = 0; m < M; m++)
        for (int p = 0; p <= L; p++) begin
          logic [K*PB-1:0] line = '0;
          if (p == 0) line[YB-1:0] = YB'(y_q[it][m]);
          else for (int i = 0; i < K; i++) line[i*PB +: PB] = PB'(phi_q[it][m][(p-1)*K + i]);
          // drive between clock edges; a line moves at a rising edge with in_ready high
          while (bubble_pct > 0 && $urandom_range(99) < bubble_pct) begin
            @(negedge clk);
            in_valid = 0;
            n_bubble++;
          end
          @(negedge clk);
          in_valid = 1;
          in_line  = line;
          while (!in_ready) @(negedge clk);
          @(posedge clk);
        end
      @(negedge clk);
      in_valid = 0;
    end
    while (!done) @(posedge clk);
    n_iter_done += int'(iter);
    check(iter == 16'(its), "iteration count");
    check(th_passes == 8'(XB + 1), "threshold passes = one per magnitude bit + apply");
    check(last_thresh == XB'(ref_thresh), $sformatf("threshold %0d vs %0d", last_thresh, ref_thresh));
    check(last_kept == 32'(ref_kept), $sformatf("kept %0d vs %0d", last_kept, ref_kept));
    // read back x'
    for (int a = 0; a < L; a++) begin
      rd_addr <= 4'(a);
      @(posedge clk);
      @(negedge clk);
      for (int i = 0; i < K; i++)
        check($signed(rd_data[i*XB +: XB]) == 32'(xpr[a*K + i]),
              $sformatf("x'[%0d] = %0d, expected %0d", a*K+i, $signed(rd_data[i*XB +: XB]), xpr[a*K+i]));
    end
    begin
      int hit = 0;
      for (int k = 0; k < 4; k++) if (xpr[sparse_idx[k]] != 0) hit++;
      $display("case L=%0d M=%0d iters=%0d: kept %0d, threshold %0d, planted support found %0d/4",
               L, M, its, last_kept, last_thresh, hit);
    end
  endtask

  // stream-phase cycle counter for the rate check
  int st_cycles = 0;
  always @(posedge clk) begin
    if (phase == qiht_pkg::PH_STREAM) st_cycles++;
    if (phase == qiht_pkg::PH_STREAM && in_valid && !in_ready) n_fifo_stall++;
    if (phase == qiht_pkg::PH_THRESH && in_valid) n_thresh_stall++;
    if (dut.u_upd.active && dut.d1_valid) n_overlap++;
    if (sat_event) n_sat++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // case 1: full rows of 16 lines, bubbles, FIFO back-pressure
    run_case(16, 6, 3, 10, 12, 9, 20, 1.0, 0);
    // case 2: 8 lines per row at full rate
    st_cycles = 0;
    run_case(8, 10, 2, 6, 12, 9, 0, 1.0, 1);
    check(st_cycles == 2 * 10 * (8 + 1), $sformatf("stream cycles %0d, expected %0d", st_cycles, 2*10*9));
    if (st_cycles == 2 * 10 * 9) n_full_rate++;
    // case 3: step too large, model saturates
    run_case(4, 12, 2, 5, 26, 0, 0, 1.0, 0);

    $display("mechanisms: fifo_stall=%0d thresh_stall=%0d bubbles=%0d overlap=%0d saturation=%0d iterations=%0d full_rate=%0d restart=%0d",
             n_fifo_stall, n_thresh_stall, n_bubble, n_overlap, n_sat, n_iter_done, n_full_rate, n_restart);
    check(n_fifo_stall > 0, "Phi FIFO back-pressure never happened");
    check(n_thresh_stall > 0, "stream never held during thresholding");
    check(n_bubble > 0, "no source bubbles");
    check(n_overlap > 0, "dot product never overlapped a model update");
    check(n_sat > 0, "saturation never happened");
    check(n_restart > 0, "engine never restarted from done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
