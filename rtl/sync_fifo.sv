// sync_fifo -- single-clock first-word-fall-through FIFO.
//
// Used three times in the engine: as the Phi FIFO, which keeps the lines of a
// Phi row until the row's dot product is known and then replays them to the
// gradient multipliers; as the y FIFO, which keeps each row's measurement
// until its dot product reaches the subtractor; and as a small queue for the
// scaled residuals. The reference design names the first two; their depth,
// the fall-through read and the status flags are this design's choice.
//
// Interface: push/wdata write at the clock edge when not full; rdata always
// shows the oldest entry while !empty and pop removes it at the clock edge.
// Pushing when full or popping when empty is an error (asserted).
// count gives the fill level. Any DEPTH >= 1 works.
module sync_fifo #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           wdata,
  input  logic                       pop,
  output logic [WIDTH-1:0]           rdata,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign rdata = mem[rptr];

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= incr(wptr);
      if (pop)  rptr <= incr(rptr);
      count <= count + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop))
    else $error("sync_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("sync_fifo: pop while empty");

endmodule
