// tb_model_ram -- writes random words, reads them back one cycle later and
// checks that a read and a write to the same address return the old word.
module tb_model_ram;
  localparam int WORDS = 16, WIDTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [3:0] raddr = '0, waddr = '0;
  logic [WIDTH-1:0] rdata, wdata = '0;
  logic we = 0;

  model_ram #(.WORDS(WORDS), .WIDTH(WIDTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] ref_mem [WORDS];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      we = 1; waddr = 4'(a); wdata = {$urandom, $urandom}; ref_mem[a] = wdata;
    end
    for (int c = 0; c < 500; c++) begin
      logic [WIDTH-1:0] expect_d;
      @(negedge clk);
      raddr = 4'($urandom_range(WORDS - 1));
      we    = ($urandom & 1) != 0;
      waddr = ($urandom_range(3) == 0) ? raddr : 4'($urandom_range(WORDS - 1));
      wdata = {$urandom, $urandom};
      expect_d = ref_mem[raddr];
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
      #1;
      check(rdata == expect_d, $sformatf("read %0d: %h vs %h", raddr, rdata, expect_d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
