// model_ram -- on-chip memory for one copy of the model (x or x').
//
// The engine keeps the signal estimate on chip while Phi streams past it.
// Each word holds the K model entries that meet one line of a Phi row, so a
// signal of N entries takes N/K words. One synchronous read port (data one
// cycle after the address) and one write port, as block RAM provides. A read
// and a write to the same address in the same cycle return the old word.
// Keeping x on chip follows the reference design; the word organisation and
// the port timing are this design's choice.
module model_ram #(
  parameter int unsigned WORDS = 512,
  parameter int unsigned WIDTH = 4096
) (
  input  logic                     clk,
  input  logic [$clog2(WORDS)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata
);
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
