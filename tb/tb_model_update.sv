// tb_model_update -- K = 4, rows of 5 lines. The testbench plays the Phi
// FIFO (with random empty cycles), the gradient multipliers (products one
// cycle after each pop) and the model memory (read data one cycle after the
// address). After a set of rows the memory must equal x - sum_m g_m Phi_m,
// saturated per step; a row at full rate must take exactly `lines` cycles
// from the residual being taken to its last pop.
module tb_model_update;
  localparam int K = 4, PB = 4, XB = 16, LMAX = 8, L = 5, ROWS = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0] lines = 4'(L);
  logic g_avail = 0, g_take, phi_empty = 1, phi_pop, p_valid = 0, x_we, busy;
  logic signed [XB-1:0] g_in = '0, g_cur;
  logic signed [K-1:0][PB+XB-1:0] prod = '0;
  logic [2:0] x_raddr, x_waddr;
  logic signed [K-1:0][XB-1:0] x_rdata = '0, x_wdata;
  logic [K-1:0] sat_flags;

  model_update #(.K(K), .PHI_BITS(PB), .X_BITS(XB), .L_MAX(LMAX)) dut (.*);

  int checks = 0, failures = 0, n_sat = 0, n_gap = 0;
  int phi_v [ROWS][L*K];
  int gv [ROWS];
  int mem [LMAX*K];
  int refm [LMAX*K];
  int pop_row = 0, pop_line = 0, take_row = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int sat16(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  // memory, FIFO and multiplier models
  always @(posedge clk) begin
    if (x_we) for (int i = 0; i < K; i++) mem[x_waddr*K + i] = int'(signed'(x_wdata[i]));
    for (int i = 0; i < K; i++) x_rdata[i] <= XB'(mem[x_raddr*K + i]);
    p_valid <= phi_pop;
    if (phi_pop) begin
      for (int i = 0; i < K; i++)
        prod[i] <= (PB+XB)'(longint'(phi_v[pop_row][pop_line*K + i]) * longint'(g_cur));
      if (pop_line == L - 1) begin pop_line = 0; pop_row++; end
      else pop_line++;
    end
    if (g_take) take_row++;
    if (|sat_flags) n_sat++;
  end

  initial begin
    for (int i = 0; i < LMAX*K; i++) begin
      mem[i] = int'($urandom_range(0, 2000)) - 1000;
      refm[i] = mem[i];
    end
    for (int r = 0; r < ROWS; r++) begin
      gv[r] = (r == ROWS - 1) ? 30000 : int'($urandom_range(0, 600)) - 300;
      for (int j = 0; j < L*K; j++) phi_v[r][j] = int'($urandom_range(0, 8)) - 4;
      for (int j = 0; j < L*K; j++)
        refm[j] = sat16(longint'(refm[j]) - longint'(phi_v[r][j]) * gv[r]);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      // residual source: offer g of row take_row whenever previous rows are taken
      forever begin
        @(negedge clk);
        g_avail = (take_row < ROWS);
        if (take_row < ROWS) g_in = XB'(gv[take_row]);
      end
      // FIFO: lines of row pop_row are present unless a random gap (rows < 20)
      forever begin
        @(negedge clk);
        phi_empty = (pop_row >= take_row) || (pop_row < 20 && $urandom_range(4) == 0);
      end
    join_none
    // timing of the full-rate rows
    for (int r = 0; r < ROWS; r++) begin
      int t0, t1;
      while (!(g_take)) @(posedge clk);
      t0 = int'($time);
      @(posedge clk);
      while (!(phi_pop && pop_line == L - 1)) @(posedge clk);
      t1 = int'($time);
      if (r >= 20) check((t1 - t0) / 10 == L, $sformatf("row %0d took %0d cycles", r, (t1 - t0) / 10));
      else if ((t1 - t0) / 10 > L) n_gap++;
      @(posedge clk);
    end
    repeat (4) @(posedge clk);
    check(!busy, "busy after the last row");
    for (int j = 0; j < L*K; j++) check(mem[j] == refm[j], $sformatf("x[%0d] %0d vs %0d", j, mem[j], refm[j]));
    for (int j = L*K; j < LMAX*K; j++) check(mem[j] == refm[j], "word outside the row changed");
    check(n_sat > 0, "saturation never exercised");
    check(n_gap > 0, "FIFO gaps never exercised");
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
