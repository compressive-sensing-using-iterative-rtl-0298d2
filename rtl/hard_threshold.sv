// hard_threshold -- H_s: keep the s largest model entries, zero the rest.
//
// Runs once after every epoch. It finds, by a binary search over the
// magnitude bits, the largest magnitude T such that more than s entries of x
// have |x| >= T, i.e. T is the (s+1)-th largest magnitude. Then every entry
// with |x| > T is kept and every other entry is set to zero, so at most s
// entries survive (fewer if several entries tie at T). The result is written
// to both x' (used by the next epoch's dot products) and x (the start point
// of the next epoch's update). The binary search for a threshold that only
// the top s values exceed is the reference design's method; the bit-serial
// search, one memory pass per magnitude bit, is this design's choice.
//
// Timing: start (one cycle) launches X_BITS counting passes of lines+1
// cycles and one apply pass of lines+1 cycles; done pulses at the end.
// Memory: synchronous read (data one cycle after x_raddr); writes go to x
// and x' at the same address (wr_en/wr_addr/wr_data).
// Outputs: thresh = T, kept = number of nonzero entries written.
// Entries of x are signed X_BITS; |x| is computed as an X_BITS-bit unsigned.
module hard_threshold #(
  parameter int unsigned K      = qiht_pkg::K,
  parameter int unsigned X_BITS = qiht_pkg::X_BITS,
  parameter int unsigned L_MAX  = qiht_pkg::L_MAX
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic [$clog2(L_MAX+1)-1:0]      lines,
  input  logic [31:0]                     s,
  output logic [$clog2(L_MAX)-1:0]        x_raddr,
  input  logic signed [K-1:0][X_BITS-1:0] x_rdata,
  output logic                            wr_en,
  output logic [$clog2(L_MAX)-1:0]        wr_addr,
  output logic signed [K-1:0][X_BITS-1:0] wr_data,
  output logic                            busy,
  output logic                            done,
  output logic [X_BITS-1:0]               thresh,
  output logic [31:0]                     kept,
  output logic [7:0]                      passes
);
  localparam int unsigned AW = $clog2(L_MAX);
  localparam int unsigned CW = $clog2(K+1);

  typedef enum logic [1:0] {S_IDLE, S_COUNT, S_APPLY} state_e;
  state_e state;

  logic [$clog2(L_MAX+1)-1:0] line;        // address being issued
  logic                       issuing;     // an address is issued this cycle
  logic                       rvalid;      // read data valid this cycle
  logic                       rlast;       // ... and it is the pass's last word
  logic [AW-1:0]              raddr_q;
  logic [$clog2(X_BITS)-1:0]  bitpos;
  logic [X_BITS-1:0]          cand;
  logic [31:0]                cnt;

  assign cand    = thresh | (X_BITS'(1) << bitpos);
  assign issuing = (state != S_IDLE) && (line < lines);
  assign x_raddr = AW'(line);

  function automatic logic [X_BITS-1:0] mag(input logic signed [X_BITS-1:0] v);
    return v[X_BITS-1] ? X_BITS'(-v) : X_BITS'(v);
  endfunction

  // per-word counts: lanes with |x| >= cand, lanes kept with |x| > thresh
  logic [CW-1:0] ge_cnt, keep_cnt;
  always_comb begin
    ge_cnt   = '0;
    keep_cnt = '0;
    for (int i = 0; i < K; i++) begin
      if (mag(x_rdata[i]) >= cand) ge_cnt = ge_cnt + 1'b1;
      if (mag(x_rdata[i]) > thresh) begin
        keep_cnt   = keep_cnt + 1'b1;
        wr_data[i] = x_rdata[i];
      end else begin
        wr_data[i] = '0;
      end
    end
  end

  assign wr_en   = (state == S_APPLY) && rvalid;
  assign wr_addr = raddr_q;
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      line    <= '0;
      rvalid  <= 1'b0;
      rlast   <= 1'b0;
      raddr_q <= '0;
      bitpos  <= '0;
      thresh  <= '0;
      cnt     <= '0;
      kept    <= '0;
      passes  <= '0;
      done    <= 1'b0;
    end else begin
      done    <= 1'b0;
      rvalid  <= issuing;
      rlast   <= issuing && (line == lines - 1'b1);
      raddr_q <= AW'(line);
      if (issuing) line <= line + 1'b1;

      case (state)
        S_IDLE: if (start) begin
          state  <= S_COUNT;
          line   <= '0;
          bitpos <= ($clog2(X_BITS))'(X_BITS - 1);
          thresh <= '0;
          cnt    <= '0;
          kept   <= '0;
          passes <= '0;
        end
        S_COUNT: if (rvalid) begin
          if (rlast) begin
            // decide this bit: more than s entries at or above cand -> T >= cand
            if (cnt + 32'(ge_cnt) > s) thresh <= cand;
            cnt    <= '0;
            line   <= '0;
            passes <= passes + 1'b1;
            if (bitpos == 0) state <= S_APPLY;
            else             bitpos <= bitpos - 1'b1;
          end else begin
            cnt <= cnt + 32'(ge_cnt);
          end
        end
        S_APPLY: if (rvalid) begin
          kept <= kept + 32'(keep_cnt);
          if (rlast) begin
            state  <= S_IDLE;
            done   <= 1'b1;
            passes <= passes + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
