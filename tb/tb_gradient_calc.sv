// tb_gradient_calc -- scalar part: g = sat((dot - (y << ys)) >>> gs) one
// cycle after s_valid, for random operands including saturating ones;
// vector part: K products phi[i] * g_cur one cycle after v_valid.
module tb_gradient_calc;
  localparam int K = 4, PB = 4, YB = 8, XB = 16, AB = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [5:0] y_shift = '0, gamma_shift = '0;
  logic s_valid = 0, g_valid, v_valid = 0, p_valid;
  logic signed [AB-1:0] dot = '0;
  logic signed [YB-1:0] y = '0;
  logic signed [XB-1:0] g, g_cur = '0;
  logic signed [K-1:0][PB-1:0] phi = '0;
  logic signed [K-1:0][PB+XB-1:0] prod;

  gradient_calc #(.K(K), .PHI_BITS(PB), .Y_BITS(YB), .X_BITS(XB), .ACC_BITS(AB)) dut (.*);

  int checks = 0, failures = 0, n_sat = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      longint d, e, r;
      longint pe [K];
      @(negedge clk);
      d = longint'($signed({$urandom, $urandom})) >>> (24 + $urandom_range(0, 12));
      y = YB'($urandom);
      y_shift = 6'($urandom_range(0, 20));
      gamma_shift = 6'($urandom_range(0, 20));
      dot = AB'(d);
      d = longint'(dot);
      s_valid = ($urandom & 1) != 0;
      g_cur = XB'($urandom);
      for (int i = 0; i < K; i++) begin
        phi[i] = PB'($urandom_range(0, 8) - 4);
        pe[i] = longint'(signed'(phi[i])) * longint'(g_cur);
      end
      v_valid = ($urandom & 1) != 0;
      r = (d - (longint'(y) <<< y_shift)) >>> gamma_shift;
      e = (r > 32767) ? 32767 : (r < -32768) ? -32768 : r;
      @(posedge clk);
      #1;
      check(g_valid == s_valid, "g_valid");
      check(p_valid == v_valid, "p_valid");
      if (s_valid) begin
        check(longint'(g) == e, $sformatf("g %0d vs %0d", g, e));
        if (e != r) n_sat++;
      end
      if (v_valid)
        for (int i = 0; i < K; i++)
          check(longint'($signed(prod[i])) == pe[i], $sformatf("prod[%0d] %0d vs %0d", i, $signed(prod[i]), pe[i]));
    end
    check(n_sat > 0, "saturation never exercised");
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
