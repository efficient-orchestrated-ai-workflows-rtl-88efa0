// Cluster Control Unit of a CBU. It holds the CBU's cluster configuration (cluster ID
// membership, leader flag and leader position, the corresponding CBUs of the neighbouring
// clusters, and in the leader the member list), and contains the Dynamic Sub-OWG Balancer
// and the Proactive Cluster Scheduler (used only when this CBU is the leader).
// Scheduling triggers (paper: an empty stream, a full output stream, or more executed tasks
// than a threshold): the input queue of the active sub-OWG is empty, any queue is full, or
// task_th streams have completed since the last cluster configuration. A trigger is raised at
// most once per MIN_GAP cycles. A member reports its loads to the leader and then sends
// M_TRIG; the leader triggers its own scheduler directly. An M_CL_CFG flit (or the leader's
// own decision) sets active_sub and pulses cl_reconfig towards the Adaptive TBU Scheduler.
// Control flits leave through one port: scheduler broadcast first, then trigger, then
// balancer. Host bus: CK_CBU_CLUST addr 0 = cl_cfg_t, addr 1+m = member m {valid,x,y};
// CK_CBU_PARAM addr 0 = period, 1 = volume, 2 = task threshold.
module cluster_cu import octopus_pkg::*; #(
  parameter int MAXM    = 16,
  parameter int PERIOD  = 100000,
  parameter int VOLUME  = 64,
  parameter int TASK_TH = 64,
  parameter int MIN_GAP = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [CO_W-1:0]             my_x,
  input  logic [CO_W-1:0]             my_y,
  input  cfg_bus_t                    cfg,
  input  logic [NQ-1:0][LOAD_W-1:0]   q_cnt,
  input  logic [NQ-1:0]               q_empty,
  input  logic [NQ-1:0]               q_full,
  input  logic                        task_done,
  // control network (local port of the control router)
  output logic                        tx_v,
  output cflit_t                      tx,
  input  logic                        tx_rdy,
  input  logic                        rx_v,
  input  cflit_t                      rx,
  // to the data port
  output logic                        mv_v,
  output move_t                       mv,
  input  logic                        mv_rdy,
  // to the adaptive TBU scheduler
  output logic [SUB_W-1:0]            active_sub,
  output logic                        cl_reconfig,
  output logic [15:0]                 n_trig,
  output logic [15:0]                 n_sched,
  output logic [15:0]                 n_rebal,
  output logic [15:0]                 n_rounds
);
  cl_cfg_t ccfg;
  logic [MAXM-1:0] mem_v;
  logic [MAXM-1:0][CO_W-1:0] mem_x, mem_y;
  logic [31:0] period;
  logic [LOAD_W-1:0] volume;
  logic [15:0] task_th, tasks;
  logic sel;
  assign sel = cfg.valid && cfg.x == my_x && cfg.y == my_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ccfg <= '0; mem_v <= '0; mem_x <= '0; mem_y <= '0;
      period <= PERIOD; volume <= LOAD_W'(VOLUME); task_th <= 16'(TASK_TH);
    end else if (sel) begin
      if (cfg.kind == CK_CBU_CLUST) begin
        if (cfg.addr == 0) ccfg <= cl_cfg_t'(cfg.data[$bits(cl_cfg_t)-1:0]);
        else for (int i = 0; i < MAXM; i++) if (int'(cfg.addr) == i + 1) begin
          mem_v[i] <= cfg.data[2*CO_W];
          mem_x[i] <= cfg.data[2*CO_W-1:CO_W];
          mem_y[i] <= cfg.data[CO_W-1:0];
        end
      end
      if (cfg.kind == CK_CBU_PARAM) case (cfg.addr)
        16'd0:   period  <= cfg.data[31:0];
        16'd1:   volume  <= cfg.data[LOAD_W-1:0];
        16'd2:   task_th <= cfg.data[15:0];
        default: ;
      endcase
    end
  end

  logic [NSUB-1:0][LOAD_W-1:0] loads;
  always_comb for (int s = 0; s < NSUB; s++) loads[s] = q_cnt[QID_W'(s)];

  // balancer
  logic b_tx_v, b_tx_rdy;
  cflit_t b_tx;
  subowg_balancer u_bal (
    .clk, .rst_n, .my_x, .my_y, .ccfg, .period, .volume, .loads,
    .tx_v(b_tx_v), .tx(b_tx), .tx_rdy(b_tx_rdy), .rx_v, .rx, .mv_v, .mv, .mv_rdy,
    .n_rounds, .n_rebal);

  // trigger
  logic cond, trig_local;
  logic [$clog2(MIN_GAP+1)-1:0] gap;
  logic [SUB_W:0] tk;          // member: NSUB load reports, then the trigger
  logic t_busy, t_tx_v, t_tx_rdy;
  cflit_t t_tx;
  assign cond = ccfg.en && gap == 0 && !t_busy &&
                (q_empty[QID_W'(active_sub)] || (|q_full) || tasks >= task_th);
  assign trig_local = cond && ccfg.leader;
  always_comb begin
    t_tx = '0;
    t_tx.dx = ccfg.lx; t_tx.dy = ccfg.ly; t_tx.sx = my_x; t_tx.sy = my_y;
    t_tx.sub = tk[SUB_W-1:0];
    t_tx.mt = tk[SUB_W] ? M_TRIG : M_LOAD_RPT;
    t_tx.load = loads[tk[SUB_W-1:0]];
    t_tx_v = t_busy;
  end

  // leader scheduler
  logic s_tx_v, s_tx_rdy, apply;
  cflit_t s_tx;
  logic [SUB_W-1:0] apply_sub;
  cluster_scheduler #(.MAXM(MAXM)) u_sch (
    .clk, .rst_n, .en(ccfg.en && ccfg.leader), .my_x, .my_y, .mem_v, .mem_x, .mem_y,
    .own_load(loads), .rx_v, .rx, .trig_local, .tx_v(s_tx_v), .tx(s_tx), .tx_rdy(s_tx_rdy),
    .apply, .apply_sub, .n_sched);

  // output port mux
  always_comb begin
    s_tx_rdy = 1'b0; t_tx_rdy = 1'b0; b_tx_rdy = 1'b0;
    if (s_tx_v)      begin tx_v = 1'b1; tx = s_tx; s_tx_rdy = tx_rdy; end
    else if (t_tx_v) begin tx_v = 1'b1; tx = t_tx; t_tx_rdy = tx_rdy; end
    else             begin tx_v = b_tx_v; tx = b_tx; b_tx_rdy = tx_rdy; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gap <= '0; tk <= '0; t_busy <= 1'b0; tasks <= '0; active_sub <= '0; cl_reconfig <= 1'b0;
      n_trig <= '0;
    end else begin
      cl_reconfig <= 1'b0;
      if (task_done) tasks <= tasks + 1'b1;
      if (gap != 0) gap <= gap - 1'b1;
      if (cond) begin
        gap <= $bits(gap)'(MIN_GAP);
        n_trig <= n_trig + 1'b1;
        if (!ccfg.leader) begin t_busy <= 1'b1; tk <= '0; end
      end
      if (t_busy && t_tx_rdy) begin
        if (tk[SUB_W]) t_busy <= 1'b0;
        else tk <= (int'(tk) == NSUB-1) ? {1'b1, {SUB_W{1'b0}}} : tk + 1'b1;
      end
      if (apply || (rx_v && rx.mt == M_CL_CFG && !ccfg.leader)) begin
        active_sub  <= apply ? apply_sub : rx.sub;
        cl_reconfig <= 1'b1;
        tasks       <= '0;
      end
    end
  end
endmodule
