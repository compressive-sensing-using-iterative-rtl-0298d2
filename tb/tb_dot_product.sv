// tb_dot_product -- K = 8 lanes, rows of 1..6 lines with random gaps.
// Each row's result is compared with a plain loop over the same numbers, and
// the result must appear exactly 2 + log2(K) cycles after the row's last line.
// Extreme operands (most negative Phi and x) are mixed in.
module tb_dot_product;
  localparam int K = 8, PB = 4, XB = 16, AB = 40, LAT = 2 + 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0, out_valid, busy;
  logic signed [K-1:0][PB-1:0] phi = '0;
  logic signed [K-1:0][XB-1:0] xp = '0;
  logic signed [AB-1:0] out_dot;

  dot_product #(.K(K), .PHI_BITS(PB), .X_BITS(XB), .ACC_BITS(AB)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  longint exp_q [$];
  int     due_q [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) cyc++;

  // output monitor
  always @(negedge clk) if (rst_n && out_valid) begin
    check(exp_q.size() > 0, "unexpected result");
    if (exp_q.size() > 0) begin
      check(out_dot == AB'(exp_q[0]), $sformatf("dot %0d vs %0d", out_dot, exp_q[0]));
      check(cyc == due_q[0], $sformatf("latency: at cycle %0d, expected %0d", cyc, due_q[0]));
      void'(exp_q.pop_front());
      void'(due_q.pop_front());
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      int L;
      longint acc;
      L = $urandom_range(1, 6);
      acc = 0;
      for (int l = 0; l < L; l++) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
        for (int i = 0; i < K; i++) begin
          int p, x;
          p = (r % 17 == 0) ? -8 : $urandom_range(0, 8) - 4;
          x = (r % 13 == 0) ? -32768 : int'($urandom_range(0, 65535)) - 32768;
          phi[i] = PB'(p);
          xp[i]  = XB'(x);
          acc += longint'(p) * longint'(x);
        end
        in_valid = 1;
        in_last  = (l == L - 1);
        if (in_last) begin
          exp_q.push_back(acc);
          due_q.push_back(cyc + LAT);
        end
      end
      @(negedge clk);
      in_valid = 0;
    end
    in_valid = 0;
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0, "results missing");
    check(!busy, "busy after drain");
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
