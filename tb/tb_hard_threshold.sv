// tb_hard_threshold -- K = 4 lanes, 6 words, 16-bit model entries.
// For random models (with ties, negative extremes and all-zero cases) and
// random s, the threshold must be the (s+1)-th largest magnitude found by
// sorting, the kept count and the written words must match keep-if-greater,
// and the run must take (X_BITS + 1) * (lines + 1) + 1 cycles from start to done.
module tb_hard_threshold;
  localparam int K = 4, XB = 16, LMAX = 8, L = 6, N = K * L;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, wr_en, busy, done;
  logic [3:0] lines = 4'(L);
  logic [31:0] s = '0, kept;
  logic [2:0] x_raddr, wr_addr;
  logic signed [K-1:0][XB-1:0] x_rdata = '0, wr_data;
  logic [XB-1:0] thresh;
  logic [7:0] passes;

  hard_threshold #(.K(K), .X_BITS(XB), .L_MAX(LMAX)) dut (.*);

  int checks = 0, failures = 0;
  int mem [LMAX*K];
  int wrote [N];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    for (int i = 0; i < K; i++) x_rdata[i] <= XB'(mem[x_raddr*K + i]);
    if (wr_en) for (int i = 0; i < K; i++) wrote[wr_addr*K + i] = int'(signed'(wr_data[i]));
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int mags [$];
      int tref, kref, t0, ncyc;
      int sv;
      sv = (t % 10 == 9) ? N + 2 : $urandom_range(0, N - 1);
      for (int i = 0; i < N; i++) begin
        case (t % 5)
          0: mem[i] = int'($urandom_range(0, 65535)) - 32768;
          1: mem[i] = int'($urandom_range(0, 6)) - 3;          // many ties
          2: mem[i] = ($urandom_range(3) == 0) ? -32768 : int'($urandom_range(0, 200)) - 100;
          3: mem[i] = 0;
          default: mem[i] = ($urandom_range(2) == 0) ? int'($urandom_range(0, 65535)) - 32768 : 0;
        endcase
        wrote[i] = 12345;
      end
      mags.delete();
      for (int i = 0; i < N; i++) mags.push_back(mem[i] < 0 ? -mem[i] : mem[i]);
      mags.rsort();
      tref = (sv < N) ? mags[sv] : 0;
      kref = 0;
      for (int i = 0; i < N; i++) if (mags[i] > tref) kref++;
      @(negedge clk);
      s = sv;
      start = 1;
      @(negedge clk);
      start = 0;
      t0 = int'($time);
      while (!done) @(negedge clk);
      ncyc = (int'($time) - t0) / 10 + 1;
      check(thresh == XB'(tref), $sformatf("test %0d: threshold %0d vs %0d", t, thresh, tref));
      check(kept == 32'(kref), $sformatf("test %0d: kept %0d vs %0d", t, kept, kref));
      check(kref <= sv, "more than s kept");
      check(passes == 8'(XB + 1), "pass count");
      check(ncyc == (XB + 1) * (L + 1) + 1, $sformatf("cycles %0d vs %0d", ncyc, (XB + 1) * (L + 1) + 1));
      for (int i = 0; i < N; i++) begin
        int a;
        a = mem[i] < 0 ? -mem[i] : mem[i];
        check(wrote[i] == ((a > tref) ? mem[i] : 0), $sformatf("test %0d: word lane %0d = %0d", t, i, wrote[i]));
      end
      @(negedge clk);
      check(!busy, "busy after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
