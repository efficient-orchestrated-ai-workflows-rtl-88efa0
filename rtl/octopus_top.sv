// Octopus chiplet: a (TX+1) x (TY+1) grid of CBUs (9 x 9) with a TX x TY grid of TBUs
// (8 x 8) between them, the data network and the control network (two meshes of identical
// topology joining the CBUs N/E/S/W), and TY TF ports with a Task Flow Port Control Unit on
// each of the west and east edges. TBU (i,j) touches CBU (i,j) at its NW corner, (i+1,j) NE,
// (i,j+1) SW and (i+1,j+1) SE.
// Coordinates: CBU column i, row j has network address (x = i+1, y = j); the west TF port of
// row j is (0, j) and the east one (TX+2, j), so dimension-ordered routing reaches them
// through the edge CBUs. The host bus addresses CBUs by network address and TBUs by (i, j).
// Interfaces: cfg (host configuration bus, one write per cycle, broadcast), hc_* (transfer
// commands for the TF ports of side 0 = west, 1 = east), mem_* (one DRAM channel per TF
// port, [side][row]), and status outputs. DRAM is outside this design.
// The grid sizes, unit mix and the two networks are the paper's; port placement on the
// edge rows and all addressing are this design's choice.
// Lint notes: rst_n also gates the assertions of the submodules (reported as sync and async use; no effect on the circuit); per-TBU stream-done pulses, TF port tag bits and other status signals are left unused at this level.
module octopus_top import octopus_pkg::*; #(
  parameter int TX         = 8,
  parameter int TY         = 8,
  parameter int ROWS       = 32,
  parameter int COLS       = 32,
  parameter int QDEPTH     = 131072,
  parameter int TSRAM      = 1048576,
  parameter int PERIOD     = 100000,
  parameter int TH         = 16,
  localparam int NC        = (TX+1)*(TY+1),
  localparam int NT        = TX*TY,
  localparam int PW        = (TY > 1) ? $clog2(TY) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_bus_t                  cfg,
  input  logic [1:0]                hc_v,
  input  logic [1:0][PW-1:0]        hc_port,
  input  tfp_cmd_t [1:0]            hc_cmd,
  output logic [1:0]                hc_rdy,
  output logic [1:0]                tfp_idle,
  output logic [1:0][15:0]          tfp_done,
  output logic [1:0][TY-1:0]        mem_req,
  output logic [1:0][TY-1:0]        mem_we,
  output logic [1:0][TY-1:0][31:0]  mem_addr,
  output logic [1:0][TY-1:0][DATA_W-1:0] mem_wdata,
  input  logic [1:0][TY-1:0]        mem_gnt,
  input  logic [1:0][TY-1:0]        mem_rv,
  input  logic [1:0][TY-1:0][DATA_W-1:0] mem_rdata,
  output logic [1:0][TY-1:0][31:0]  tfp_stored,
  output logic [NT-1:0]             tbu_run,
  output logic [NT-1:0][CIDX_W-1:0] tbu_cur,
  output logic [NT-1:0][15:0]       tbu_reconfig,
  output logic [NT-1:0][15:0]       tbu_idle_rpt,
  output logic [NT-1:0][15:0]       tbu_cong_rpt,
  output cbu_stats_t [NC-1:0]       cbu_stats,
  output logic [NC-1:0][SUB_W-1:0]  cbu_sub,
  output logic [NC-1:0][NQ-1:0][LOAD_W-1:0] cbu_qcnt
);
  // register the host bus once so it fans out from flops
  cfg_bus_t cfg_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cfg_q <= '0; else cfg_q <= cfg;

  // ---------------- TBU side signals, [tbu][tbu-view corner] ----------------
  logic [NT-1:0][3:0]            tp_req, tp_gnt, tp_rv, tpu_v, tpu_rdy, tr_rdy, tc_rdy;
  logic [NT-1:0][3:0][QID_W-1:0] tp_q, tpu_q;
  tf_word_t [NT-1:0][3:0]        tp_rd;
  tf_word_t [NT-1:0]             tpu_w;
  tbu_rpt_t [NT-1:0][3:0]        tr;
  tbu_cmd_t [NT-1:0][3:0]        tc;
  logic [NT-1:0]                 t_done;

  // ---------------- CBU side signals, [cbu][cbu-view corner / link] ----------------
  logic [NC-1:0][3:0]            cp_req, cp_gnt, cp_rv, cpu_v, cpu_rdy, cr_rdy, cc_rdy;
  logic [NC-1:0][3:0][QID_W-1:0] cp_q, cpu_q;
  tf_word_t [NC-1:0][3:0]        cp_rd, cpu_w;
  tbu_rpt_t [NC-1:0][3:0]        cr;
  tbu_cmd_t [NC-1:0][3:0]        cc;
  logic [NC-1:0][3:0]            di_v, di_rdy, do_v, do_rdy, ci_v, ci_rdy, co_v, co_rdy;
  dflit_t [NC-1:0][3:0]          di_d, do_d;
  cflit_t [NC-1:0][3:0]          ci_d, co_d;

  function automatic int cid(int i, int j); return j*(TX+1) + i; endfunction
  function automatic int tid(int i, int j); return j*TX + i; endfunction

  for (genvar j = 0; j < TY; j++) begin : g_ty
    for (genvar i = 0; i < TX; i++) begin : g_tx
      localparam int T = j*TX + i;
      tbu #(.ROWS(ROWS), .COLS(COLS), .SRAM_DEPTH(TSRAM), .TH(TH)) u_tbu (
        .clk, .rst_n, .my_x(CO_W'(i)), .my_y(CO_W'(j)), .cfg(cfg_q),
        .pop_req(tp_req[T]), .pop_q(tp_q[T]), .pop_gnt(tp_gnt[T]), .pop_rv(tp_rv[T]),
        .pop_rd(tp_rd[T]), .push_v(tpu_v[T]), .push_q(tpu_q[T]), .push_w(tpu_w[T]),
        .push_rdy(tpu_rdy[T]), .rpt_o(tr[T]), .rpt_rdy(tr_rdy[T]), .cmd_i(tc[T]),
        .cmd_rdy(tc_rdy[T]), .run(tbu_run[T]), .cur_idx(tbu_cur[T]), .done_stream(t_done[T]),
        .n_reconfig(tbu_reconfig[T]), .n_idle(tbu_idle_rpt[T]), .n_congested(tbu_cong_rpt[T]));
      // corner d of the TBU is CBU (i + d[0], j + d[1]), which sees the TBU at corner 3-d
      for (genvar d = 0; d < 4; d++) begin : g_c
        localparam int C = (j + d/2)*(TX+1) + (i + d%2);
        assign tp_gnt[T][d]  = cp_gnt[C][3-d];
        assign tp_rv[T][d]   = cp_rv[C][3-d];
        assign tp_rd[T][d]   = cp_rd[C][3-d];
        assign tpu_rdy[T][d] = cpu_rdy[C][3-d];
        assign tr_rdy[T][d]  = cr_rdy[C][3-d];
        assign tc[T][d]      = cc[C][3-d];
      end
    end
  end

  for (genvar j = 0; j <= TY; j++) begin : g_cy
    for (genvar i = 0; i <= TX; i++) begin : g_cx
      localparam int C = j*(TX+1) + i;
      // corner links: CBU corner e holds TBU (i - 1 + e[0], j - 1 + e[1]) at its corner 3-e
      for (genvar e = 0; e < 4; e++) begin : g_e
        localparam int TI = i - 1 + e%2;
        localparam int TJ = j - 1 + e/2;
        if (TI >= 0 && TI < TX && TJ >= 0 && TJ < TY) begin : g_t
          localparam int T = TJ*TX + TI;
          assign cp_req[C][e] = tp_req[T][3-e];
          assign cp_q[C][e]   = tp_q[T][3-e];
          assign cpu_v[C][e]  = tpu_v[T][3-e];
          assign cpu_q[C][e]  = tpu_q[T][3-e];
          assign cpu_w[C][e]  = tpu_w[T];
          assign cr[C][e]     = tr[T][3-e];
          assign cc_rdy[C][e] = tc_rdy[T][3-e];
        end else begin : g_n
          assign cp_req[C][e] = 1'b0;
          assign cp_q[C][e]   = '0;
          assign cpu_v[C][e]  = 1'b0;
          assign cpu_q[C][e]  = '0;
          assign cpu_w[C][e]  = '0;
          assign cr[C][e]     = '0;
          assign cc_rdy[C][e] = 1'b0;
        end
      end
      // mesh links: 0 N, 1 E, 2 S, 3 W
      if (j > 0) begin : g_n
        assign di_v[C][0] = do_v[C-(TX+1)][2]; assign di_d[C][0] = do_d[C-(TX+1)][2];
        assign do_rdy[C][0] = di_rdy[C-(TX+1)][2];
        assign ci_v[C][0] = co_v[C-(TX+1)][2]; assign ci_d[C][0] = co_d[C-(TX+1)][2];
        assign co_rdy[C][0] = ci_rdy[C-(TX+1)][2];
      end else begin : g_nn
        assign di_v[C][0] = 1'b0; assign di_d[C][0] = '0; assign do_rdy[C][0] = 1'b0;
        assign ci_v[C][0] = 1'b0; assign ci_d[C][0] = '0; assign co_rdy[C][0] = 1'b0;
      end
      if (j < TY) begin : g_s
        assign di_v[C][2] = do_v[C+(TX+1)][0]; assign di_d[C][2] = do_d[C+(TX+1)][0];
        assign do_rdy[C][2] = di_rdy[C+(TX+1)][0];
        assign ci_v[C][2] = co_v[C+(TX+1)][0]; assign ci_d[C][2] = co_d[C+(TX+1)][0];
        assign co_rdy[C][2] = ci_rdy[C+(TX+1)][0];
      end else begin : g_sn
        assign di_v[C][2] = 1'b0; assign di_d[C][2] = '0; assign do_rdy[C][2] = 1'b0;
        assign ci_v[C][2] = 1'b0; assign ci_d[C][2] = '0; assign co_rdy[C][2] = 1'b0;
      end
      if (i < TX) begin : g_e2
        assign di_v[C][1] = do_v[C+1][3]; assign di_d[C][1] = do_d[C+1][3];
        assign do_rdy[C][1] = di_rdy[C+1][3];
        assign ci_v[C][1] = co_v[C+1][3]; assign ci_d[C][1] = co_d[C+1][3];
        assign co_rdy[C][1] = ci_rdy[C+1][3];
      end else begin : g_en
        assign ci_v[C][1] = 1'b0; assign ci_d[C][1] = '0; assign co_rdy[C][1] = 1'b0;
      end
      if (i > 0) begin : g_w
        assign di_v[C][3] = do_v[C-1][1]; assign di_d[C][3] = do_d[C-1][1];
        assign do_rdy[C][3] = di_rdy[C-1][1];
        assign ci_v[C][3] = co_v[C-1][1]; assign ci_d[C][3] = co_d[C-1][1];
        assign co_rdy[C][3] = ci_rdy[C-1][1];
      end else begin : g_wn
        assign ci_v[C][3] = 1'b0; assign ci_d[C][3] = '0; assign co_rdy[C][3] = 1'b0;
      end

      cbu #(.QDEPTH(QDEPTH), .PERIOD(PERIOD)) u_cbu (
        .clk, .rst_n, .my_x(CO_W'(i+1)), .my_y(CO_W'(j)), .cfg(cfg_q),
        .t_pop_req(cp_req[C]), .t_pop_q(cp_q[C]), .t_pop_gnt(cp_gnt[C]), .t_pop_rv(cp_rv[C]),
        .t_pop_rd(cp_rd[C]), .t_push_v(cpu_v[C]), .t_push_q(cpu_q[C]), .t_push_w(cpu_w[C]),
        .t_push_rdy(cpu_rdy[C]), .t_rpt(cr[C]), .t_rpt_rdy(cr_rdy[C]), .t_cmd(cc[C]),
        .t_cmd_rdy(cc_rdy[C]),
        .d_in_v(di_v[C]), .d_in_d(di_d[C]), .d_in_rdy(di_rdy[C]),
        .d_out_v(do_v[C]), .d_out_d(do_d[C]), .d_out_rdy(do_rdy[C]),
        .c_in_v(ci_v[C]), .c_in_d(ci_d[C]), .c_in_rdy(ci_rdy[C]),
        .c_out_v(co_v[C]), .c_out_d(co_d[C]), .c_out_rdy(co_rdy[C]),
        .q_cnt(cbu_qcnt[C]), .active_sub(cbu_sub[C]), .stats(cbu_stats[C]));
    end
  end

  // ---------------- TF ports on the west (side 0) and east (side 1) edges ----------------
  for (genvar s = 0; s < 2; s++) begin : g_side
    logic [TY-1:0] p_cmd_v, p_cmd_rdy, p_done;
    tfp_cmd_t p_cmd;
    tf_port_cu #(.NP(TY)) u_cu (
      .clk, .rst_n, .hc_v(hc_v[s]), .hc_port(hc_port[s]), .hc_cmd(hc_cmd[s]),
      .hc_rdy(hc_rdy[s]), .p_cmd_v, .p_cmd, .p_cmd_rdy, .p_done, .n_done(tfp_done[s]),
      .idle(tfp_idle[s]));
    for (genvar r = 0; r < TY; r++) begin : g_p
      localparam int C  = r*(TX+1) + (s == 0 ? 0 : TX);
      localparam int LK = (s == 0) ? 3 : 1;
      tf_port u_p (
        .clk, .rst_n, .cmd_v(p_cmd_v[r]), .cmd(p_cmd), .cmd_rdy(p_cmd_rdy[r]), .done(p_done[r]),
        .o_v(di_v[C][LK]), .o_d(di_d[C][LK]), .o_rdy(di_rdy[C][LK]),
        .i_v(do_v[C][LK]), .i_d(do_d[C][LK]), .i_rdy(do_rdy[C][LK]),
        .mem_req(mem_req[s][r]), .mem_we(mem_we[s][r]), .mem_addr(mem_addr[s][r]),
        .mem_wdata(mem_wdata[s][r]), .mem_gnt(mem_gnt[s][r]), .mem_rv(mem_rv[s][r]),
        .mem_rdata(mem_rdata[s][r]), .n_stored(tfp_stored[s][r]));
    end
    // the edge CBU of the bottom row has no TF port
    begin : g_last
      localparam int C  = TY*(TX+1) + (s == 0 ? 0 : TX);
      localparam int LK = (s == 0) ? 3 : 1;
      assign di_v[C][LK] = 1'b0;
      assign di_d[C][LK] = '0;
      assign do_rdy[C][LK] = 1'b0;
    end
  end
endmodule
