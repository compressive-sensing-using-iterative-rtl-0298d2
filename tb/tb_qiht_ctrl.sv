// tb_qiht_ctrl -- drives the controller through two runs of 2 iterations
// over 3 rows of 4 Phi lines, with random source gaps, random FIFO-full
// back-pressure, a drain that takes a while and a thresholder that answers
// after a delay. Checks the clear sweep, the order and labels of accepted
// lines (header, then Phi lines 0..3 with last on 3), that nothing is accepted
// outside an epoch or while a FIFO is full, one th_start per epoch, the
// iteration count and done.
module tb_qiht_ctrl;
  localparam int LMAX = 8, L = 4, ROWS = 3, ITERS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, in_valid = 0, in_ready, phi_full = 0, y_full = 0;
  logic [31:0] rows = ROWS;
  logic [3:0]  lines = 4'(L);
  logic [15:0] iters = 16'(ITERS);
  logic acc_y, acc_phi, phi_last, clr_we, dp_idle = 0, th_start, th_done = 0, done;
  logic [2:0] phi_idx, clr_addr;
  qiht_pkg::phase_e phase;
  logic [15:0] iter;

  qiht_ctrl #(.L_MAX(LMAX)) dut (.*);

  int checks = 0, failures = 0;
  int pos = 0, n_acc = 0, n_clr = 0, n_th = 0, n_block = 0;
  int clr_next = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // checker at every rising edge
  always @(posedge clk) if (rst_n) begin
    check(in_ready == (phase == qiht_pkg::PH_STREAM && !phi_full && !y_full), "in_ready rule");
    if (clr_we) begin
      check(int'(clr_addr) == clr_next, $sformatf("clear address %0d, expected %0d", clr_addr, clr_next));
      clr_next = (clr_next + 1) % L;
      n_clr++;
    end
    if (in_valid && !in_ready) n_block++;
    if (in_valid && in_ready) begin
      n_acc++;
      check(acc_y == (pos == 0) && acc_phi == (pos != 0), $sformatf("line kind at position %0d", pos));
      if (pos != 0) begin
        check(int'(phi_idx) == pos - 1, $sformatf("phi index %0d at position %0d", phi_idx, pos));
        check(phi_last == (pos == L), "last flag");
      end
      pos = (pos == L) ? 0 : pos + 1;
    end else begin
      check(!acc_y && !acc_phi, "accept without handshake");
    end
    if (th_start) begin
      n_th++;
      check(phase == qiht_pkg::PH_THRESH, "th_start outside THRESH");
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      n_acc = 0; n_th = 0; n_clr = 0;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      fork : run_f
        // source and FIFO back-pressure
        forever begin
          @(negedge clk);
          in_valid = ($urandom_range(4) != 0);
          phi_full = ($urandom_range(5) == 0);
          y_full   = ($urandom_range(7) == 0);
        end
        // datapath drain and thresholder
        forever begin
          @(negedge clk);
          dp_idle = 0;
          th_done = 0;
          if (phase == qiht_pkg::PH_DRAIN) begin
            repeat (7) @(negedge clk);
            dp_idle = 1;
          end else if (phase == qiht_pkg::PH_THRESH) begin
            repeat (5) @(negedge clk);
            th_done = 1;
          end
        end
      join_none
      while (!done) @(negedge clk);
      disable run_f;
      in_valid = 0; dp_idle = 0; th_done = 0; phi_full = 0; y_full = 0;
      check(n_clr == L, $sformatf("clear cycles %0d", n_clr));
      check(n_acc == ITERS * ROWS * (L + 1), $sformatf("accepted %0d lines", n_acc));
      check(n_th == ITERS, $sformatf("th_start %0d times", n_th));
      check(iter == 16'(ITERS), "iteration count");
      repeat (3) @(negedge clk);
      check(done && !in_ready, "done holds, stream closed");
    end
    check(n_block > 0, "back-pressure never seen");
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
