// Control Block Processing Unit. Data flow plane: TF Queue (multi-bank SRAM queues), CB
// Engine, data port (data switch port to the four corner TBUs and data router port).
// Control flow plane: Adaptive TBU Scheduler, Cluster Control Unit (Dynamic Sub-OWG Balancer
// and Proactive Cluster Scheduler with Sub-OWG Arbiter), control port (control switch port
// and control router port). TF Queue clients: 0..3 corner TBUs (NW, NE, SW, SE as seen from
// the CBU), 4 data port, 5 CB engine. Host bus: CK_CBU_ENTRY (scheduler entry addr),
// CK_CBU_RULE (engine rule addr), CK_CBU_MOVE (host transfer), CK_CBU_CLUST, CK_CBU_PARAM
// for unit (x,y). A task (for the cluster trigger) is a stream whose last packet a corner
// TBU has taken from the queue.
// Lint notes: the data-port busy flag and some message bits are not used by this CBU's logic; rst_n also gates the assertions.
module cbu import octopus_pkg::*; #(
  parameter int QDEPTH  = 131072,
  parameter int PERIOD  = 100000,
  parameter int MAXM    = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [CO_W-1:0]       my_x,
  input  logic [CO_W-1:0]       my_y,
  input  cfg_bus_t              cfg,
  // corner TBU data links (CBU view: NW, NE, SW, SE)
  input  logic [3:0]            t_pop_req,
  input  logic [3:0][QID_W-1:0] t_pop_q,
  output logic [3:0]            t_pop_gnt,
  output logic [3:0]            t_pop_rv,
  output tf_word_t [3:0]        t_pop_rd,
  input  logic [3:0]            t_push_v,
  input  logic [3:0][QID_W-1:0] t_push_q,
  input  tf_word_t [3:0]        t_push_w,
  output logic [3:0]            t_push_rdy,
  // corner TBU control links
  input  tbu_rpt_t [3:0]        t_rpt,
  output logic [3:0]            t_rpt_rdy,
  output tbu_cmd_t [3:0]        t_cmd,
  input  logic [3:0]            t_cmd_rdy,
  // data network links N, E, S, W
  input  logic [3:0]            d_in_v,
  input  dflit_t [3:0]          d_in_d,
  output logic [3:0]            d_in_rdy,
  output logic [3:0]            d_out_v,
  output dflit_t [3:0]          d_out_d,
  input  logic [3:0]            d_out_rdy,
  // control network links N, E, S, W
  input  logic [3:0]            c_in_v,
  input  cflit_t [3:0]          c_in_d,
  output logic [3:0]            c_in_rdy,
  output logic [3:0]            c_out_v,
  output cflit_t [3:0]          c_out_d,
  input  logic [3:0]            c_out_rdy,
  output logic [NQ-1:0][LOAD_W-1:0] q_cnt,
  output logic [SUB_W-1:0]      active_sub,
  output cbu_stats_t            stats
);
  logic sel;
  assign sel = cfg.valid && cfg.x == my_x && cfg.y == my_y;

  // ---------------- TF Queue ----------------
  logic [5:0] q_push_v, q_push_rdy, q_pop_req, q_pop_gnt, q_pop_rv;
  logic [5:0][QID_W-1:0] q_push_q, q_pop_q;
  tf_word_t [5:0] q_push_w, q_pop_rd;
  logic [NQ-1:0] q_empty, q_full;

  tf_queue #(.QDEPTH(QDEPTH), .NPORT(6)) u_q (
    .clk, .rst_n, .push_v(q_push_v), .push_q(q_push_q), .push_w(q_push_w),
    .push_rdy(q_push_rdy), .pop_req(q_pop_req), .pop_q(q_pop_q), .pop_gnt(q_pop_gnt),
    .pop_rv(q_pop_rv), .pop_rd(q_pop_rd), .cnt(q_cnt), .empty(q_empty), .full(q_full));

  assign q_push_v[3:0] = t_push_v;
  assign q_push_q[3:0] = t_push_q;
  assign q_push_w[3:0] = t_push_w;
  assign t_push_rdy    = q_push_rdy[3:0];
  assign q_pop_req[3:0] = t_pop_req;
  assign q_pop_q[3:0]   = t_pop_q;
  assign t_pop_gnt      = q_pop_gnt[3:0];
  assign t_pop_rv       = q_pop_rv[3:0];
  assign t_pop_rd       = q_pop_rd[3:0];

  // ---------------- data port ----------------
  logic bal_mv_v, bal_mv_rdy, host_mv_v, host_mv_rdy, dp_busy;
  move_t bal_mv, host_mv;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin host_mv_v <= 1'b0; host_mv <= '0; end
    else if (sel && cfg.kind == CK_CBU_MOVE) begin
      host_mv_v <= 1'b1; host_mv <= move_t'(cfg.data[$bits(move_t)-1:0]);
    end else if (host_mv_rdy) host_mv_v <= 1'b0;
  end

  cbu_data_port u_dp (
    .clk, .rst_n, .my_x, .my_y,
    .ln_in_v(d_in_v), .ln_in_d(d_in_d), .ln_in_rdy(d_in_rdy),
    .ln_out_v(d_out_v), .ln_out_d(d_out_d), .ln_out_rdy(d_out_rdy),
    .push_v(q_push_v[4]), .push_q(q_push_q[4]), .push_w(q_push_w[4]), .push_rdy(q_push_rdy[4]),
    .pop_req(q_pop_req[4]), .pop_q(q_pop_q[4]), .pop_gnt(q_pop_gnt[4]), .pop_rv(q_pop_rv[4]),
    .pop_rd(q_pop_rd[4]), .q_empty,
    .bal_mv_v, .bal_mv, .bal_mv_rdy, .host_mv_v, .host_mv, .host_mv_rdy, .busy(dp_busy),
    .n_moved(stats.n_moved), .n_recv(stats.n_recv));

  // ---------------- CB engine ----------------
  cb_engine u_cb (
    .clk, .rst_n, .rule_we(sel && cfg.kind == CK_CBU_RULE), .rule_idx(cfg.addr[1:0]),
    .rule_wd(cb_rule_t'(cfg.data[$bits(cb_rule_t)-1:0])), .q_empty,
    .push_v(q_push_v[5]), .push_q(q_push_q[5]), .push_w(q_push_w[5]), .push_rdy(q_push_rdy[5]),
    .pop_req(q_pop_req[5]), .pop_q(q_pop_q[5]), .pop_gnt(q_pop_gnt[5]), .pop_rv(q_pop_rv[5]),
    .pop_rd(q_pop_rd[5]), .n_packets(stats.n_cb));

  // ---------------- control port ----------------
  logic l_tx_v, l_tx_rdy, l_rx_v;
  cflit_t l_tx, l_rx;
  tbu_rpt_t [3:0] s_rpt;
  logic [3:0] s_rpt_rdy, s_cmd_rdy;
  tbu_cmd_t [3:0] s_cmd;
  cbu_control_port u_cp (
    .clk, .rst_n, .my_x, .my_y,
    .ln_in_v(c_in_v), .ln_in_d(c_in_d), .ln_in_rdy(c_in_rdy),
    .ln_out_v(c_out_v), .ln_out_d(c_out_d), .ln_out_rdy(c_out_rdy),
    .l_tx_v, .l_tx, .l_tx_rdy, .l_rx_v, .l_rx,
    .t_rpt, .t_rpt_rdy, .t_cmd, .t_cmd_rdy, .s_rpt, .s_rpt_rdy, .s_cmd, .s_cmd_rdy);

  // ---------------- adaptive TBU scheduler ----------------
  logic cl_reconfig;
  logic [3:0] own_mask;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) own_mask <= 4'b1000;
    else if (sel && cfg.kind == CK_CBU_PARAM && cfg.addr == 16'd3) own_mask <= cfg.data[3:0];
  adaptive_tbu_scheduler u_ats (
    .clk, .rst_n, .ent_we(sel && cfg.kind == CK_CBU_ENTRY), .ent_idx(cfg.addr[2:0]),
    .ent_wd(sched_ent_t'(cfg.data[$bits(sched_ent_t)-1:0])),
    .rpt_i(s_rpt), .rpt_rdy(s_rpt_rdy), .cmd_o(s_cmd), .cmd_rdy(s_cmd_rdy),
    .q_cnt, .q_full, .active_sub, .cl_reconfig, .own_mask,
    .n_switch(stats.n_switch), .n_stay(stats.n_stay));

  // ---------------- cluster control unit ----------------
  logic task_done;
  always_comb begin
    task_done = 1'b0;
    for (int d = 0; d < 4; d++) if (q_pop_rv[d] && q_pop_rd[d].last) task_done = 1'b1;
  end
  cluster_cu #(.MAXM(MAXM), .PERIOD(PERIOD)) u_cl (
    .clk, .rst_n, .my_x, .my_y, .cfg, .q_cnt, .q_empty, .q_full, .task_done,
    .tx_v(l_tx_v), .tx(l_tx), .tx_rdy(l_tx_rdy), .rx_v(l_rx_v), .rx(l_rx),
    .mv_v(bal_mv_v), .mv(bal_mv), .mv_rdy(bal_mv_rdy), .active_sub, .cl_reconfig,
    .n_trig(stats.n_trig), .n_sched(stats.n_sched), .n_rebal(stats.n_rebal),
    .n_rounds(stats.n_rounds));
endmodule
