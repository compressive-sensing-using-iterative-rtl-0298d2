// tb_qiht_full -- one complete run of the engine at its default size.
//
// qiht_top with default parameters: K = 128 four-bit values per 64 B line,
// 512 lines per row, i.e. a model of N = 65 536 entries (a 256 x 256 image),
// 32-bit model words. The run clears the model, streams M = 4 rows of Phi and
// y per iteration for 2 iterations (a fresh random quantized Phi and y each
// iteration) and keeps the s = 30 largest entries. The whole x' is read back
// and compared with a plain integer reference model; the stream must run at
// one line per cycle (rows * 513 cycles per epoch).
module tb_qiht_full;
  localparam int K = 128, PB = 4, YB = 8, XB = 32, L = 512, N = K * L;
  localparam int M = 4, ITERS = 2, S = 30, YS = 12, GS = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 start = 0;
  logic [31:0]          cfg_rows = M, cfg_s = S;
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

  int checks = 0, failures = 0, st_cycles = 0;
  byte    phi_q [ITERS][M][N];
  int     y_q   [ITERS][M];
  longint xr [N], xpr [N];
  longint ref_thresh, ref_kept;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic longint sat32(longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  function automatic longint absl(longint v);
    return v < 0 ? -v : v;
  endfunction

  task automatic reference();
    longint mags [$];
    for (int i = 0; i < N; i++) begin xr[i] = 0; xpr[i] = 0; end
    for (int it = 0; it < ITERS; it++) begin
      for (int m = 0; m < M; m++) begin
        longint d, g;
        d = 0;
        for (int i = 0; i < N; i++) d += longint'(phi_q[it][m][i]) * xpr[i];
        g = sat32((d - (longint'(y_q[it][m]) <<< YS)) >>> GS);
        for (int i = 0; i < N; i++) xr[i] = sat32(xr[i] - longint'(phi_q[it][m][i]) * g);
      end
      mags.delete();
      for (int i = 0; i < N; i++) mags.push_back(absl(xr[i]));
      mags.rsort();
      ref_thresh = mags[S];
      ref_kept = 0;
      for (int i = 0; i < N; i++) begin
        xpr[i] = (absl(xr[i]) > ref_thresh) ? xr[i] : 0;
        xr[i] = xpr[i];
        if (xpr[i] != 0) ref_kept++;
      end
    end
  endtask

  always @(posedge clk) if (phase == qiht_pkg::PH_STREAM) st_cycles++;

  initial begin
    for (int it = 0; it < ITERS; it++)
      for (int m = 0; m < M; m++) begin
        y_q[it][m] = int'($urandom_range(0, 128)) - 64;
        for (int i = 0; i < N; i++) phi_q[it][m][i] = byte'(int'($urandom_range(0, 8)) - 4);
      end
    reference();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int it = 0; it < ITERS; it++)
      for (int m = 0; m < M; m++)
        for (int p = 0; p <= L; p++) begin
          logic [511:0] line;
          line = '0;
          if (p == 0) line[YB-1:0] = YB'(y_q[it][m]);
          else for (int i = 0; i < K; i++) line[i*PB +: PB] = PB'(phi_q[it][m][(p-1)*K + i]);
          in_valid = 1;
          in_line  = line;
          while (!in_ready) @(negedge clk);
          @(negedge clk);
        end
    in_valid = 0;
    while (!done) @(negedge clk);
    check(iter == 16'(ITERS), "iteration count");
    check(st_cycles == ITERS * M * (L + 1), $sformatf("stream cycles %0d, expected %0d", st_cycles, ITERS*M*(L+1)));
    check(last_thresh == XB'(ref_thresh), $sformatf("threshold %0d vs %0d", last_thresh, ref_thresh));
    check(last_kept == 32'(ref_kept), $sformatf("kept %0d vs %0d", last_kept, ref_kept));
    for (int a = 0; a < L; a++) begin
      @(negedge clk);
      rd_addr = 9'(a);
      @(negedge clk);
      for (int i = 0; i < K; i++)
        check($signed(rd_data[i*XB +: XB]) == 32'(xpr[a*K + i]),
              $sformatf("x'[%0d] = %0d, expected %0d", a*K+i, $signed(rd_data[i*XB +: XB]), xpr[a*K+i]));
    end
    $display("full size: N=%0d, kept %0d, threshold %0d, stream cycles %0d", N, last_kept, last_thresh, st_cycles);
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
