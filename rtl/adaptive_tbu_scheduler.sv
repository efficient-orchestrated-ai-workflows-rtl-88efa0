// Adaptive TBU Scheduler of a CBU. It holds a table of NENT task blocks the CBU can give to
// its corner TBUs (sched_ent_t: configuration index, input queue, output queue, sub-OWG).
// When a TBU reports that its input is idle or its output congested, the scheduler checks
// the TF Queue status and picks, among the TBs of the cluster's active sub-OWG other than
// the reporting TBU's current one, the TB whose input queue holds the most packets, provided
// it holds at least TH_IN packets and its output queue is not full. It answers with that
// configuration index (sw=1), or with sw=0 (keep running) if no TB qualifies.
// On a cluster reconfiguration (cl_reconfig, sub-OWG active_sub) it sends the best TB of the
// new sub-OWG to the corner TBUs selected by own_mask (by default only the SE one, which this
// CBU owns; a CBU at the centre of a 2x2-TBU cluster may own all four). Reports from the four corners
// are served one per cycle (NW first); each corner has a one-entry response register.
// Links are indexed by corner as seen from the CBU. The queue-status check and the returned
// configuration index are the paper's; the selection rule is this design's choice.
module adaptive_tbu_scheduler import octopus_pkg::*; #(
  parameter int NENT  = 8,
  parameter int TH_IN = 1,
  localparam int EW   = (NENT > 1) ? $clog2(NENT) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      ent_we,
  input  logic [EW-1:0]             ent_idx,
  input  sched_ent_t                ent_wd,
  input  tbu_rpt_t [3:0]            rpt_i,
  output logic [3:0]                rpt_rdy,
  output tbu_cmd_t [3:0]            cmd_o,
  input  logic [3:0]                cmd_rdy,
  input  logic [NQ-1:0][LOAD_W-1:0] q_cnt,
  input  logic [NQ-1:0]             q_full,
  input  logic [SUB_W-1:0]          active_sub,
  input  logic                      cl_reconfig,
  input  logic [3:0]                own_mask,
  output logic [15:0]               n_switch,
  output logic [15:0]               n_stay
);
  sched_ent_t ent [NENT];
  logic [3:0] rc_pend;
  logic [1:0] rd;
  logic rv;
  logic [1:0] sd;
  logic sv;

  function automatic logic [CIDX_W:0] best(logic excl, logic [CIDX_W-1:0] cur);
    logic [LOAD_W-1:0] bc;
    logic [CIDX_W:0] r;
    bc = '0; r = '0;
    for (int e = 0; e < NENT; e++)
      if (ent[e].valid && ent[e].sub == active_sub && !(excl && ent[e].idx == cur) &&
          q_cnt[ent[e].in_q] >= LOAD_W'(TH_IN) && !q_full[ent[e].out_q] &&
          (!r[CIDX_W] || q_cnt[ent[e].in_q] > bc)) begin
        bc = q_cnt[ent[e].in_q];
        r  = {1'b1, ent[e].idx};
      end
    return r;
  endfunction

  // serve one report per cycle
  always_comb begin
    rpt_rdy = '0; sv = 1'b0; sd = '0;
    for (int d = 3; d >= 0; d--)
      if (rpt_i[d].valid && !cmd_o[d].valid) begin sv = 1'b1; sd = 2'(d); end
    if (sv) rpt_rdy[sd] = 1'b1;
    rv = 1'b0; rd = '0;
    for (int d = 3; d >= 0; d--)
      if (rc_pend[d] && !cmd_o[d].valid) begin rv = 1'b1; rd = 2'(d); end
  end

  logic [CIDX_W:0] b_rpt, b_rc;
  assign b_rpt = best(1'b1, rpt_i[sd].cur);
  assign b_rc  = best(1'b0, '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NENT; e++) ent[e] <= '0;
      cmd_o <= '0; rc_pend <= '0; n_switch <= '0; n_stay <= '0;
    end else begin
      if (ent_we) ent[ent_idx] <= ent_wd;
      for (int d = 0; d < 4; d++) if (cmd_o[d].valid && cmd_rdy[d]) cmd_o[d].valid <= 1'b0;
      if (cl_reconfig) rc_pend <= own_mask;
      if (sv) begin
        cmd_o[sd] <= '{valid: 1'b1, sw: b_rpt[CIDX_W], idx: b_rpt[CIDX_W-1:0]};
        if (b_rpt[CIDX_W]) n_switch <= n_switch + 1'b1;
        else               n_stay   <= n_stay + 1'b1;
      end else if (rv && !cl_reconfig) begin
        rc_pend[rd] <= 1'b0;
        if (b_rc[CIDX_W]) cmd_o[rd] <= '{valid: 1'b1, sw: 1'b1, idx: b_rc[CIDX_W-1:0]};
      end
    end
  end
endmodule
