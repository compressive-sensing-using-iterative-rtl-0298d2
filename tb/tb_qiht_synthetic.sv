// tb_qiht_synthetic -- sparse recovery of Gaussian test problems on the
// default-size engine.
//
// The test problem is the classic one for hard thresholding: Phi is a
// 128 x 1024 matrix with i.i.d. N(0,1) entries, the signal x has s non-zero
// N(0,1) entries at random places and y = Phi x (noiseless). Three sparsity
// levels share the testbench (s = 4, 8, 12). The engine is the unmodified
// qiht_top (K = 128 lanes of 4 bits); a 1024-entry model occupies 8 lines
// of it, so cfg_lines = 8 and cfg_rows = 128.
//
// Every epoch the testbench draws a fresh stochastic quantization of Phi/3
// (clipped to [-1, 1], 9 levels j/4) and of y/CY (129 levels j/64) and
// streams it; the random rounding is unbiased, so on average the quantized
// gradient equals the full-precision one. Fixed-point scaling: the model
// has XF = 16 fraction bits, y_shift = XF + 4 - 8 and gamma_shift =
// GK + 2*(4 - 2) for a step of 2^-GK. The recovered vector estimates 3 x / CY.
//
// Checks, per sparsity level:
//   * every model word, the threshold and the kept count after the last
//     epoch equal an integer reference model fed the same quantized data;
//   * the stream runs at one line per cycle (ITERS * 128 * 9 cycles);
//   * exactly s entries survive, at least half of the true support is among
//     them and the relative error of CY/3 * x' against x is below 0.5. With
//     4-bit Phi and a fixed step of 2^-5, 60 epochs give errors of about
//     0.1 to 0.2; the entries that are missed are the smallest ones of x,
//     which drown in the quantization noise. The margins are wide so that
//     other random draws pass too.
module tb_qiht_synthetic;
  localparam int K = 128, PB = 4, YB = 8, XB = 32, L = 8, N = K * L, M = 128;
  localparam int XF = 16, YS = XF + PB - YB, GK = 5, GS = GK + 2 * (PB - 2);
  localparam int ITERS = 60;
  localparam real CY = 8.0;
  localparam int NS = 3;
  localparam int SPARS [NS] = '{4, 8, 12};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 start = 0;
  logic [31:0]          cfg_rows = M, cfg_s = 0;
  logic [9:0]           cfg_lines = 10'(L);
  logic [15:0]          cfg_iters = 16'(ITERS);
  logic [5:0]           cfg_y_shift = 6'(YS), cfg_gamma_shift = 6'(GS);
  logic                 in_valid = 0, in_ready;
  logic [511:0]         in_line = '0;
  qiht_pkg::phase_e     phase;
  logic [15:0]          iter;
  logic                 done, sat_event;
  logic [XB-1:0]        last_thresh;
  logic [31:0]          last_kept;
  logic [10:0]          phi_level;
  logic [7:0]           th_passes;
  logic [8:0]           rd_addr = '0;
  logic [K*XB-1:0]      rd_data;

  qiht_top dut (
    .clk, .rst_n, .start, .cfg_rows, .cfg_lines, .cfg_iters, .cfg_s,
    .cfg_y_shift, .cfg_gamma_shift, .in_valid, .in_ready, .in_line,
    .phase, .iter, .done, .last_thresh, .last_kept, .sat_event,
    .phi_fifo_level(phi_level), .th_passes, .rd_addr, .rd_data
  );

  int     checks = 0, failures = 0, st_cycles = 0;
  real    phi_r [M][N];
  real    x_true [N];
  real    y_r [M];
  byte    phi_q [M][N];
  int     y_q [M];
  longint xr [N], xpr [N];
  longint ref_thresh, ref_kept;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic real uni();
    return (real'($urandom) + 0.5) / 4294967296.0;
  endfunction

  function automatic real gauss();
    return $sqrt(-2.0 * $ln(uni())) * $cos(6.283185307179586 * uni());
  endfunction

  // Unbiased stochastic rounding of v * levels, v clipped to [-1, 1].
  function automatic int squant(real v, int levels);
    real s, lo;
    if (v > 1.0) v = 1.0;
    if (v < -1.0) v = -1.0;
    s  = v * levels;
    lo = $floor(s);
    return int'(lo) + ((uni() < s - lo) ? 1 : 0);
  endfunction

  function automatic longint sat32(longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  function automatic longint absl(longint v);
    return v < 0 ? -v : v;
  endfunction

  // One epoch of the integer reference on the current quantized data.
  task automatic ref_epoch(int s);
    longint mags [$];
    for (int m = 0; m < M; m++) begin
      longint d, g;
      d = 0;
      for (int i = 0; i < N; i++) d += longint'(phi_q[m][i]) * xpr[i];
      g = sat32((d - (longint'(y_q[m]) <<< YS)) >>> GS);
      for (int i = 0; i < N; i++) xr[i] = sat32(xr[i] - longint'(phi_q[m][i]) * g);
    end
    mags.delete();
    for (int i = 0; i < N; i++) mags.push_back(absl(xr[i]));
    mags.rsort();
    ref_thresh = mags[s];
    ref_kept = 0;
    for (int i = 0; i < N; i++) begin
      xpr[i] = (absl(xr[i]) > ref_thresh) ? xr[i] : 0;
      xr[i] = xpr[i];
      if (xpr[i] != 0) ref_kept++;
    end
  endtask

  task automatic run_sparsity(int s);
    int  pos, hits, cyc0;
    real err, nrm, est;
    // problem
    for (int m = 0; m < M; m++)
      for (int i = 0; i < N; i++) phi_r[m][i] = gauss();
    for (int i = 0; i < N; i++) x_true[i] = 0.0;
    pos = 0;
    while (pos < s) begin
      int i;
      i = int'($urandom_range(0, N - 1));
      if (x_true[i] == 0.0) begin
        x_true[i] = gauss();
        pos++;
      end
    end
    for (int m = 0; m < M; m++) begin
      y_r[m] = 0.0;
      for (int i = 0; i < N; i++) y_r[m] += phi_r[m][i] * x_true[i];
    end
    for (int i = 0; i < N; i++) begin xr[i] = 0; xpr[i] = 0; end
    cfg_s = 32'(s);
    cyc0 = st_cycles;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int it = 0; it < ITERS; it++) begin
      for (int m = 0; m < M; m++) begin
        y_q[m] = squant(y_r[m] / CY, 1 << (YB - 2));
        for (int i = 0; i < N; i++) phi_q[m][i] = byte'(squant(phi_r[m][i] / 3.0, 1 << (PB - 2)));
      end
      ref_epoch(s);
      for (int m = 0; m < M; m++)
        for (int p = 0; p <= L; p++) begin
          logic [511:0] line;
          line = '0;
          if (p == 0) line[YB-1:0] = YB'(y_q[m]);
          else for (int i = 0; i < K; i++) line[i*PB +: PB] = PB'(phi_q[m][(p-1)*K + i]);
          in_valid = 1;
          in_line  = line;
          while (!in_ready) @(negedge clk);
          @(negedge clk);
        end
    end
    in_valid = 0;
    while (!done) @(negedge clk);
    check(iter == 16'(ITERS), $sformatf("s=%0d iteration count %0d", s, iter));
    check(st_cycles - cyc0 == ITERS * M * (L + 1),
          $sformatf("s=%0d stream cycles %0d, expected %0d", s, st_cycles - cyc0, ITERS*M*(L+1)));
    check(last_thresh == XB'(ref_thresh), $sformatf("s=%0d threshold %0d vs %0d", s, last_thresh, ref_thresh));
    check(last_kept == 32'(ref_kept), $sformatf("s=%0d kept %0d vs %0d", s, last_kept, ref_kept));
    hits = 0;
    err = 0.0;
    nrm = 0.0;
    for (int a = 0; a < L; a++) begin
      @(negedge clk);
      rd_addr = 9'(a);
      @(negedge clk);
      for (int i = 0; i < K; i++) begin
        longint hw;
        hw = longint'($signed(rd_data[i*XB +: XB]));
        check(hw == xpr[a*K + i], $sformatf("s=%0d x'[%0d] = %0d, expected %0d", s, a*K+i, hw, xpr[a*K+i]));
        if ((hw != 0) && (x_true[a*K + i] != 0.0)) hits++;
        est = real'(hw) / 65536.0 * CY / 3.0;
        err += (est - x_true[a*K + i]) ** 2;
        nrm += x_true[a*K + i] ** 2;
      end
    end
    check(last_kept == 32'(s), $sformatf("s=%0d kept %0d entries", s, last_kept));
    check(2 * hits >= s, $sformatf("s=%0d support recovery: %0d of %0d found", s, hits, s));
    check($sqrt(err / nrm) < 0.5, $sformatf("s=%0d relative error %f", s, $sqrt(err / nrm)));
    $display("s=%0d: %0d epochs, support %0d/%0d, relative error %f, threshold %0d",
             s, ITERS, hits, s, $sqrt(err / nrm), last_thresh);
  endtask

  always @(posedge clk) if (phase == qiht_pkg::PH_STREAM) st_cycles++;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NS; k++) run_sparsity(SPARS[k]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
