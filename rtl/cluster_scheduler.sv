// Proactive Cluster Scheduler, active in the cluster leader's CBU. It keeps the latest
// per-sub-OWG load reported by each of up to MAXM member CBUs (M_LOAD_RPT flits) and adds its
// own CBU's loads. On a trigger (a member's M_TRIG flit or the leader's own trig_local) the
// Sub-OWG Arbiter picks the sub-OWG with the largest total load; the scheduler makes it the
// cluster's sub-OWG, applies it locally (apply pulse) and sends M_CL_CFG to every member.
// A trigger that arrives during a broadcast is kept and served afterwards.
// Collecting load from all CBUs of the cluster and choosing the longest queue are the
// paper's; the message set is this design's choice.
// Lint notes: the source-coordinate bits of a received message are not needed.
module cluster_scheduler import octopus_pkg::*; #(
  parameter int MAXM = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        en,
  input  logic [CO_W-1:0]             my_x,
  input  logic [CO_W-1:0]             my_y,
  input  logic [MAXM-1:0]             mem_v,
  input  logic [MAXM-1:0][CO_W-1:0]   mem_x,
  input  logic [MAXM-1:0][CO_W-1:0]   mem_y,
  input  logic [NSUB-1:0][LOAD_W-1:0] own_load,
  input  logic                        rx_v,
  input  cflit_t                      rx,
  input  logic                        trig_local,
  output logic                        tx_v,
  output cflit_t                      tx,
  input  logic                        tx_rdy,
  output logic                        apply,
  output logic [SUB_W-1:0]            apply_sub,
  output logic [15:0]                 n_sched
);
  localparam int SW = LOAD_W + 4;
  logic [MAXM-1:0][NSUB-1:0][LOAD_W-1:0] ml;
  logic [NSUB-1:0][SW-1:0] tot;
  logic [SUB_W-1:0] sel;
  logic sel_v, pend, bc;
  logic [$clog2(MAXM+1)-1:0] m;

  always_comb begin
    for (int s = 0; s < NSUB; s++) begin
      tot[s] = SW'(own_load[s]);
      for (int i = 0; i < MAXM; i++) if (mem_v[i]) tot[s] = tot[s] + SW'(ml[i][s]);
    end
  end
  subowg_arbiter #(.SW(SW)) u_arb (.load(tot), .sel, .valid(sel_v));

  always_comb begin
    tx = '0;
    tx.dx = mem_x[m[$clog2(MAXM)-1:0]]; tx.dy = mem_y[m[$clog2(MAXM)-1:0]];
    tx.sx = my_x; tx.sy = my_y; tx.mt = M_CL_CFG; tx.sub = apply_sub;
    tx_v = bc && !m[$clog2(MAXM)] && mem_v[m[$clog2(MAXM)-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ml <= '0; pend <= 1'b0; bc <= 1'b0; m <= '0; apply <= 1'b0; apply_sub <= '0; n_sched <= '0;
    end else begin
      apply <= 1'b0;
      if (rx_v && rx.mt == M_LOAD_RPT)
        for (int i = 0; i < MAXM; i++)
          if (mem_v[i] && mem_x[i] == rx.sx && mem_y[i] == rx.sy) ml[i][rx.sub] <= rx.load;
      if (en && (trig_local || (rx_v && rx.mt == M_TRIG))) pend <= 1'b1;
      if (bc) begin
        if (m[$clog2(MAXM)]) bc <= 1'b0;
        else if (!tx_v || tx_rdy) m <= m + 1'b1;
      end else if (pend && sel_v && !(rx_v && rx.mt == M_LOAD_RPT)) begin
        pend <= 1'b0; bc <= 1'b1; m <= '0;
        apply <= 1'b1; apply_sub <= sel; n_sched <= n_sched + 1'b1;
      end else if (pend && !sel_v) pend <= 1'b0;
    end
  end
endmodule
