// tb_sync_fifo -- random push/pop against a queue model.
// Depth 5 (not a power of two) so the pointer wrap is exercised; checks the
// fall-through data, empty, full and count every cycle.
module tb_sync_fifo;
  localparam int W = 16, D = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, empty, full;
  logic [W-1:0] wdata = '0, rdata;
  logic [$clog2(D+1)-1:0] count;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] q [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      check(count == ($clog2(D+1))'(q.size()), $sformatf("count %0d vs %0d", count, q.size()));
      check(empty == (q.size() == 0), "empty flag");
      check(full == (q.size() == D), "full flag");
      if (q.size() > 0) check(rdata == q[0], $sformatf("rdata %h vs %h", rdata, q[0]));
      if (full) n_full++;
      if (empty) n_empty++;
      // phases: fill-biased, then drain-biased
      push  = !full && ($urandom_range(99) < ((c / 300) % 2 == 0 ? 70 : 30));
      pop   = !empty && ($urandom_range(99) < ((c / 300) % 2 == 0 ? 30 : 70));
      wdata = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    check(n_full > 0 && n_empty > 0, "never full or never empty");
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
