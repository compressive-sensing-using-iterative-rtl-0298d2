// qiht_ctrl -- phase sequencer and stream counter of the QIHT engine.
//
// One run of the engine is: clear the model (x = x' = 0), then n* iterations
// of { one epoch: every row of Phi and y streams in and its gradient is added
// to x; drain the pipeline; hard thresholding x' = H_s(x) }, then done.
// Updating x only after all rows and thresholding after every epoch is the
// reference design's IHT schedule; the phase machine and the stream layout
// below are this design's choice.
//
// Stream layout: per row m, one header line whose low Y_BITS hold y_m, then
// `lines` Phi lines (K values each). The controller accepts a line when
// in_valid && in_ready (in_ready: STREAM phase and both FIFOs have room) and
// tells the datapath what it is (acc_y / acc_phi, the Phi line's index in the
// row, whether it is the row's last). After rows*(lines+1) lines it waits
// for dp_idle, pulses th_start and waits for th_done.
//
// Phases (qiht_pkg::phase_e): IDLE -start-> CLEAR (lines cycles, clr_we)
// -> STREAM -> DRAIN -> THRESH -> STREAM ... -> DONE. start in DONE begins
// a new run. iter counts finished iterations.
module qiht_ctrl
#(
  parameter int unsigned L_MAX = qiht_pkg::L_MAX
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [31:0]                   rows,
  input  logic [$clog2(L_MAX+1)-1:0]    lines,
  input  logic [15:0]                   iters,
  // stream handshake
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic                          phi_full,
  input  logic                          y_full,
  output logic                          acc_y,
  output logic                          acc_phi,
  output logic [$clog2(L_MAX)-1:0]      phi_idx,
  output logic                          phi_last,
  // model clear
  output logic                          clr_we,
  output logic [$clog2(L_MAX)-1:0]      clr_addr,
  // end of epoch
  input  logic                          dp_idle,
  output logic                          th_start,
  input  logic                          th_done,
  output qiht_pkg::phase_e                        phase,
  output logic [15:0]                   iter,
  output logic                          done
);
  localparam int unsigned AW = $clog2(L_MAX);
  localparam int unsigned LW = $clog2(L_MAX+1);

  logic [31:0]  row;
  logic [LW-1:0] pos;     // 0 = header line, 1..lines = Phi lines
  logic          th_wait;
  logic          accept;

  assign in_ready = (phase == qiht_pkg::PH_STREAM) && !phi_full && !y_full;
  assign accept   = in_valid && in_ready;
  assign acc_y    = accept && (pos == 0);
  assign acc_phi  = accept && (pos != 0);
  assign phi_idx  = AW'(pos - 1'b1);
  assign phi_last = (pos == lines);
  assign clr_we   = (phase == qiht_pkg::PH_CLEAR);
  assign clr_addr = AW'(pos);
  assign done     = (phase == qiht_pkg::PH_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= qiht_pkg::PH_IDLE;
      row      <= '0;
      pos      <= '0;
      iter     <= '0;
      th_start <= 1'b0;
      th_wait  <= 1'b0;
    end else begin
      th_start <= 1'b0;
      case (phase)
        qiht_pkg::PH_IDLE, qiht_pkg::PH_DONE: if (start) begin
          phase <= qiht_pkg::PH_CLEAR;
          pos   <= '0;
          row   <= '0;
          iter  <= '0;
        end
        qiht_pkg::PH_CLEAR: begin
          if (pos == lines - 1'b1) begin
            pos   <= '0;
            phase <= qiht_pkg::PH_STREAM;
          end else begin
            pos <= pos + 1'b1;
          end
        end
        qiht_pkg::PH_STREAM: if (accept) begin
          if (pos == lines) begin
            pos <= '0;
            if (row == rows - 1) begin
              row   <= '0;
              phase <= qiht_pkg::PH_DRAIN;
            end else begin
              row <= row + 1;
            end
          end else begin
            pos <= pos + 1'b1;
          end
        end
        qiht_pkg::PH_DRAIN: if (dp_idle) begin
          phase    <= qiht_pkg::PH_THRESH;
          th_start <= 1'b1;
          th_wait  <= 1'b1;
        end
        qiht_pkg::PH_THRESH: if (th_done && th_wait) begin
          th_wait <= 1'b0;
          iter    <= iter + 1'b1;
          phase   <= (iter + 1'b1 == iters) ? qiht_pkg::PH_DONE : qiht_pkg::PH_STREAM;
        end
        default: phase <= qiht_pkg::PH_IDLE;
      endcase
    end
  end
endmodule
