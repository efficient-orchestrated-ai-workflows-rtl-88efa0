// Task Block Status Checker of a TBU. While the TB runs it counts consecutive cycles in which
// the input stream is exhausted (starved) or the output stream cannot be delivered (blocked).
// When either count reaches TH it raises a status report (tbu_rpt_t: reason IDLE or
// CONGESTED, running configuration index) and holds it until the control port takes it
// (rpt_ready). It then stays quiet until the CBU's answer arrives (resp), so one bottleneck
// produces one request. Counts restart whenever the condition breaks or run drops.
// The paper gives the checker's job (detect idle/congested streams, send the request);
// the threshold counter and the hold-off are this design's choice.
module tb_status_checker import octopus_pkg::*; #(
  parameter int TH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  logic              starved,
  input  logic              blocked,
  input  logic [CIDX_W-1:0] cur_idx,
  output tbu_rpt_t          rpt,
  input  logic              rpt_ready,
  input  logic              resp,
  output logic [15:0]       n_idle,
  output logic [15:0]       n_congested
);
  logic [$clog2(TH+1)-1:0] c_st, c_bl;
  logic waiting;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_st <= '0; c_bl <= '0; waiting <= 1'b0; rpt <= '0; n_idle <= '0; n_congested <= '0;
    end else begin
      if (rpt.valid && rpt_ready) begin
        rpt.valid <= 1'b0;
        waiting   <= 1'b1;
      end
      if (resp) waiting <= 1'b0;
      if (!run || waiting || rpt.valid) begin
        c_st <= '0; c_bl <= '0;
      end else begin
        c_st <= starved ? c_st + 1'b1 : '0;
        c_bl <= blocked ? c_bl + 1'b1 : '0;
        if (blocked && c_bl == $bits(c_bl)'(TH-1)) begin
          rpt <= '{valid: 1'b1, reason: RSN_CONGESTED, cur: cur_idx};
          n_congested <= n_congested + 1'b1;
        end else if (starved && c_st == $bits(c_st)'(TH-1)) begin
          rpt <= '{valid: 1'b1, reason: RSN_IDLE, cur: cur_idx};
          n_idle <= n_idle + 1'b1;
        end
      end
    end
  end
endmodule
