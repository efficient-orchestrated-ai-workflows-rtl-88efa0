// End-to-end test of the Octopus chiplet at reduced size: 4 x 2 TBUs (4 x 4 PEs each),
// 5 x 3 CBUs with 64-entry queues, two clusters of 2 x 2 TBUs (left and right) whose centre
// CBUs hold the queues and lead the clusters.
// Workflow: sub-OWG 0 = raw packets -> CB engine EXPAND (q5 -> q0) -> TB0 (x*3+1, q0 -> q4)
// -> TB1 ((x^0x55)+5x, slow and data-dependent, q4 -> q6); sub-OWG 1 = TB2 (x-7, q1 -> q7).
// All input enters the left cluster through the west TF port of row 1; the right cluster
// only gets work through diffusive load balancing. The host drains q6/q7 of both centres
// to DRAM. Checks: every expected result arrives exactly once (count, sum and a hash sum
// over the DRAM contents, computed from an independent model of the functions) and each
// mechanism happened at least once: TBU status reports (idle and congested), adaptive TB
// switches, TF Trigger reconfigurations, cluster triggers from a member, leader decisions,
// load-exchange rounds, rebalancing moves, network transfers, CB engine work, TF port loads.
module tb_octopus_top;
  import octopus_pkg::*;
  localparam int TX = 4, TY = 2, ROWS = 4, COLS = 4, NC = (TX+1)*(TY+1), NT = TX*TY;
  localparam int PW = 1;
  localparam int BASE = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_bus_t cfg;
  logic [1:0] hc_v, hc_rdy, tfp_idle;
  logic [1:0][PW-1:0] hc_port;
  tfp_cmd_t [1:0] hc_cmd;
  logic [1:0][15:0] tfp_done;
  logic [1:0][TY-1:0] mem_req, mem_we, mem_gnt, mem_rv;
  logic [1:0][TY-1:0][31:0] mem_addr, mem_wdata, mem_rdata, tfp_stored;
  logic [NT-1:0] tbu_run;
  logic [NT-1:0][CIDX_W-1:0] tbu_cur;
  logic [NT-1:0][15:0] tbu_reconfig, tbu_idle_rpt, tbu_cong_rpt;
  cbu_stats_t [NC-1:0] cbu_stats;
  logic [NC-1:0][SUB_W-1:0] cbu_sub;
  logic [NC-1:0][NQ-1:0][LOAD_W-1:0] cbu_qcnt;

  octopus_top #(.TX(TX), .TY(TY), .ROWS(ROWS), .COLS(COLS), .QDEPTH(64), .TSRAM(64),
                .PERIOD(300), .TH(8)) dut (.*);

  for (genvar s = 0; s < 2; s++) begin : g_s
    for (genvar r = 0; r < TY; r++) begin : g_r
      dram_model #(.WORDS(4096)) u_m (
        .clk, .req(mem_req[s][r]), .we(mem_we[s][r]), .addr(mem_addr[s][r]),
        .wdata(mem_wdata[s][r]), .gnt(mem_gnt[s][r]), .rv(mem_rv[s][r]),
        .rdata(mem_rdata[s][r]));
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- host bus helpers ----------------
  task automatic cfgw(cfg_kind_e k, int x, int y, int a, logic [CFG_DW-1:0] d);
    @(negedge clk);
    cfg = '{valid: 1'b1, kind: k, x: CO_W'(x), y: CO_W'(y), addr: 16'(a), data: d};
    @(negedge clk);
    cfg = '0;
  endtask
  function automatic logic [15:0] pe(pe_op_e op, pe_src_e a, pe_src_e b, int imm);
    pe_cfg_t c;
    c = '{op: op, a: a, b: b, wr_reg: 1'b0, imm: 7'(imm)};
    return 16'(c);
  endfunction

  function automatic sched_ent_t se(sched_ent_t e); return e; endfunction

  // ---------------- reference model ----------------
  function automatic logic [31:0] f0(logic [31:0] x); return x*3 + 1; endfunction
  function automatic logic [31:0] f1(logic [31:0] x); return (x ^ 32'h55) + x*5; endfunction
  function automatic logic [31:0] f2(logic [31:0] x); return x - 7; endfunction
  function automatic logic [31:0] hsh(logic [31:0] v); return (v * 32'h9E3779B1) ^ (v >> 7); endfunction

  localparam int N0 = 20, N1 = 96;
  int exp_cnt = 0;
  int exp_mult [logic [31:0]];
  int n_bad = 0;
  logic [31:0] exp_sum = 0, exp_h = 0;

  // load TB configuration idx into TBU (i,j): rows written from a table of PE words
  task automatic load_tb(int i, int j, int idx, int k, diag_e d);
    logic [CFG_DW-1:0] row;
    tb_hdr_t h;
    for (int r = 0; r < ROWS; r++) begin
      row = '0;
      for (int c = 0; c < COLS; c++) row[c*16 +: 16] = pe(OP_PASS, SRC_W, SRC_W, 0);
      if (k == 0 && r == ROWS-1) begin
        row[0 +: 16]  = pe(OP_MUL, SRC_W, SRC_IMM, 3);
        row[16 +: 16] = pe(OP_ADD, SRC_W, SRC_IMM, 1);
      end
      if (k == 1 && r == ROWS-2) row[0 +: 16] = pe(OP_MUL, SRC_W, SRC_IMM, 5);
      if (k == 1 && r == ROWS-1) begin
        row[0 +: 16] = pe(OP_XOR, SRC_W, SRC_IMM, 7'h55);
        row[(COLS-1)*16 +: 16] = pe(OP_ADD, SRC_W, SRC_N, 0);
      end
      if (k == 2 && r == ROWS-1) row[0 +: 16] = pe(OP_SUB, SRC_W, SRC_IMM, 7);
      cfgw(CK_TBU_ROW, i, j, (idx << 8) | r, row);
    end
    case (k)
      0: h = '{in_dir: d, in_q: 3'd0, out_dir: d, out_q: 3'd4, ii: 8'd1, dyn: 1'b0, sub: 2'd0};
      1: h = '{in_dir: d, in_q: 3'd4, out_dir: d, out_q: 3'd6, ii: 8'd6, dyn: 1'b1, sub: 2'd0};
      default: h = '{in_dir: d, in_q: 3'd1, out_dir: d, out_q: 3'd7, ii: 8'd4, dyn: 1'b0, sub: 2'd1};
    endcase
    cfgw(CK_TBU_HDR, i, j, idx, CFG_DW'(h));
  endtask

  task automatic host_load(int side, int port, int addr, int len, int dx, int dy, int q, int tag);
    @(negedge clk);
    while (!hc_rdy[side]) @(negedge clk);
    hc_v[side] = 1'b1; hc_port[side] = PW'(port);
    hc_cmd[side] = '{store_base: 1'b0, addr: 32'(addr), len: 16'(len), dx: CO_W'(dx),
                      dy: CO_W'(dy), q: QID_W'(q), tag: TAG_W'(tag)};
    @(negedge clk);
    hc_v[side] = 1'b0;
  endtask
  task automatic host_base(int side, int port, int addr);
    @(negedge clk);
    while (!hc_rdy[side]) @(negedge clk);
    hc_v[side] = 1'b1; hc_port[side] = PW'(port);
    hc_cmd[side] = '{store_base: 1'b1, addr: 32'(addr), len: 16'd0, dx: '0, dy: '0, q: '0, tag: '0};
    @(negedge clk);
    hc_v[side] = 1'b0;
  endtask
  task automatic host_move(int x, int y, int q, int dx, int dy);
    move_t m;
    m = '{src_q: QID_W'(q), cnt: LOAD_W'(1000), dx: CO_W'(dx), dy: CO_W'(dy), dq: '0};
    cfgw(CK_CBU_MOVE, x, y, 0, CFG_DW'(m));
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog stored=%0d/%0d exp=%0d done=%0d", tfp_stored[0][1], tfp_stored[1][1], exp_cnt, tfp_done[0]);
    for (int c = 0; c < NC; c++) $display("cbu %0d q=%0d,%0d,%0d,%0d,%0d,%0d,%0d,%0d sw=%0d st=%0d trig=%0d sch=%0d rnd=%0d reb=%0d mv=%0d rcv=%0d cb=%0d", c, cbu_qcnt[c][0], cbu_qcnt[c][1], cbu_qcnt[c][2], cbu_qcnt[c][3], cbu_qcnt[c][4], cbu_qcnt[c][5], cbu_qcnt[c][6], cbu_qcnt[c][7], cbu_stats[c].n_switch, cbu_stats[c].n_stay, cbu_stats[c].n_trig, cbu_stats[c].n_sched, cbu_stats[c].n_rounds, cbu_stats[c].n_rebal, cbu_stats[c].n_moved, cbu_stats[c].n_recv, cbu_stats[c].n_cb);
    for (int t = 0; t < NT; t++) $display("tbu %0d run=%b cur=%0d rc=%0d idle=%0d cong=%0d", t, tbu_run[t], tbu_cur[t], tbu_reconfig[t], tbu_idle_rpt[t], tbu_cong_rpt[t]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got_cnt;
  logic [31:0] got_sum, got_h;
  int s_reconf, s_idle, s_cong, s_switch, s_trig_m, s_sched, s_rounds, s_rebal, s_moved, s_cb, s_recv_r;

  initial begin
    cfg = '0; hc_v = '0; hc_port = '0; hc_cmd = '0;
    // preload DRAM: sub-OWG 0 raw packets at 0, sub-OWG 1 packets at 256 (west, row 1)
    #1;
    for (int k = 0; k < N0; k++) begin
      logic [31:0] p;
      int n;
      n = 1 + (k % 3);
      p = {4'(n), 28'(k*7 + 3)};
      g_s[0].g_r[1].u_m.mem[k] = p;
      for (int j = 0; j < n; j++) begin
        logic [31:0] v;
        v = f1(f0({4'(j), 28'(k*7 + 3)}));
        exp_cnt++; exp_sum += v; exp_h += hsh(v);
        if (exp_mult.exists(v)) exp_mult[v]++; else exp_mult[v] = 1;
      end
    end
    for (int k = 0; k < N1; k++) begin
      logic [31:0] v;
      g_s[0].g_r[1].u_m.mem[256 + k] = 32'(1000 + k*13);
      v = f2(32'(1000 + k*13));
      exp_cnt++; exp_sum += v; exp_h += hsh(v);
      if (exp_mult.exists(v)) exp_mult[v]++; else exp_mult[v] = 1;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // TB configurations: every TBU talks to the centre CBU of its cluster
    for (int j = 0; j < TY; j++)
      for (int i = 0; i < TX; i++) begin
        diag_e d;
        d = diag_e'(((i % 2 == 0) ? 1 : 0) + ((j == 0) ? 2 : 0));
        for (int k = 0; k < 3; k++) load_tb(i, j, k, k, d);
      end
    // centre CBUs (2,1) and (4,1): scheduler entries, expand rule, cluster leadership
    for (int c = 0; c < 2; c++) begin
      int cx;
      cl_cfg_t cc;
      cb_rule_t rl;
      cx = 2 + 2*c;
      cfgw(CK_CBU_ENTRY, cx, 1, 0, CFG_DW'(se('{valid: 1'b1, idx: 3'd0, in_q: 3'd0, out_q: 3'd4, sub: 2'd0})));
      cfgw(CK_CBU_ENTRY, cx, 1, 1, CFG_DW'(se('{valid: 1'b1, idx: 3'd1, in_q: 3'd4, out_q: 3'd6, sub: 2'd0})));
      cfgw(CK_CBU_ENTRY, cx, 1, 2, CFG_DW'(se('{valid: 1'b1, idx: 3'd2, in_q: 3'd1, out_q: 3'd7, sub: 2'd1})));
      rl = '{valid: 1'b1, op: CB_EXPAND, sq0: 3'd5, sq1: 3'd5, dq0: 3'd0, dq1: 3'd0, param: 16'd0};
      cfgw(CK_CBU_RULE, cx, 1, 0, CFG_DW'(rl));
      cfgw(CK_CBU_PARAM, cx, 1, 3, CFG_DW'(4'b1111));
      cfgw(CK_CBU_PARAM, cx, 1, 2, CFG_DW'(16'd16));
      cc = '0; cc.en = 1'b1; cc.leader = 1'b1; cc.lx = CO_W'(cx); cc.ly = CO_W'(1);
      if (c == 0) begin cc.nb_valid[1] = 1'b1; cc.nbx[1] = 4'd4; cc.nby[1] = 4'd1; end
      else        begin cc.nb_valid[3] = 1'b1; cc.nbx[3] = 4'd2; cc.nby[3] = 4'd1; end
      cfgw(CK_CBU_CLUST, cx, 1, 0, CFG_DW'(cc));
      // members: the other three CBUs owning TBUs of this cluster
      for (int m = 0; m < 3; m++) begin
        int mx, my;
        mx = cx - 1 + (m % 2); my = (m < 2) ? 0 : 1;
        cfgw(CK_CBU_CLUST, cx, 1, 1 + m, CFG_DW'({1'b1, 4'(mx), 4'(my)}));
        cc = '0; cc.en = 1'b1; cc.lx = CO_W'(cx); cc.ly = CO_W'(1);
        cfgw(CK_CBU_CLUST, mx, my, 0, CFG_DW'(cc));
      end
    end
    // store regions, input streams
    host_base(0, 1, BASE);
    host_base(1, 1, BASE);
    for (int s = 0; s < 4; s++) host_load(0, 1, s*5, 5, 2, 1, 5, s);
    for (int s = 0; s < 12; s++) host_load(0, 1, 256 + s*8, 8, 2, 1, 1, 16 + s);

    // drain results until everything has arrived
    repeat (3000) @(posedge clk);
    while (tfp_stored[0][1] + tfp_stored[1][1] < 32'(exp_cnt)) begin
      repeat (400) @(posedge clk);
      host_move(2, 1, 6, 0, 1);
      host_move(2, 1, 7, 0, 1);
      host_move(4, 1, 6, TX+2, 1);
      host_move(4, 1, 7, TX+2, 1);
    end
    repeat (50) @(posedge clk);

    got_cnt = int'(tfp_stored[0][1] + tfp_stored[1][1]);
    got_sum = 0; got_h = 0;
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < int'(tfp_stored[s][1]); a++) begin
        logic [31:0] v;
        v = (s == 0) ? g_s[0].g_r[1].u_m.mem[BASE + a] : g_s[1].g_r[1].u_m.mem[BASE + a];
        got_sum += v; got_h += hsh(v);
        if (exp_mult.exists(v) && exp_mult[v] > 0) exp_mult[v]--;
        else begin n_bad++; if (n_bad < 8) $display("unexpected result %h (side %0d word %0d)", v, s, a); end
      end
    check(n_bad == 0, $sformatf("%0d results not in the expected set", n_bad));
    check(got_cnt == exp_cnt, $sformatf("result count %0d, expected %0d", got_cnt, exp_cnt));
    check(got_sum == exp_sum, $sformatf("result sum %h, expected %h", got_sum, exp_sum));
    check(got_h == exp_h, $sformatf("result hash %h, expected %h", got_h, exp_h));
    check(tfp_done[0] == 16'd16, "west TF port completed the 16 loads");

    s_reconf = 0; s_idle = 0; s_cong = 0;
    for (int t = 0; t < NT; t++) begin
      s_reconf += tbu_reconfig[t]; s_idle += tbu_idle_rpt[t]; s_cong += tbu_cong_rpt[t];
    end
    s_switch = 0; s_trig_m = 0; s_sched = 0; s_rounds = 0; s_rebal = 0; s_moved = 0; s_cb = 0;
    s_recv_r = int'(cbu_stats[1*(TX+1) + 3].n_recv);
    for (int c = 0; c < NC; c++) begin
      s_switch += cbu_stats[c].n_switch; s_sched += cbu_stats[c].n_sched;
      s_rounds += cbu_stats[c].n_rounds; s_rebal += cbu_stats[c].n_rebal;
      s_moved += cbu_stats[c].n_moved; s_cb += cbu_stats[c].n_cb;
      if (c != 1*(TX+1) + 1 && c != 1*(TX+1) + 3) s_trig_m += cbu_stats[c].n_trig;
    end
    $display("reconfig=%0d idle_rpt=%0d cong_rpt=%0d switch=%0d member_trig=%0d sched=%0d rounds=%0d rebal=%0d moved=%0d cb=%0d right_recv=%0d",
             s_reconf, s_idle, s_cong, s_switch, s_trig_m, s_sched, s_rounds, s_rebal, s_moved, s_cb, s_recv_r);
    check(s_reconf > 0, "TF Trigger reconfigurations");
    check(s_idle > 0,   "idle-input status reports");
    check(s_cong > 0,   "congested-output status reports");
    check(s_switch > 0, "adaptive TB switches");
    check(s_trig_m > 0, "cluster triggers raised by member CBUs");
    check(s_sched > 0,  "proactive cluster decisions");
    check(s_rounds > 0, "load-exchange rounds");
    check(s_rebal > 0,  "diffusive rebalancing moves");
    check(s_recv_r > 0, "right cluster received rebalanced load");
    check(s_cb > 0,     "CB engine expand work");
    check(int'(tfp_stored[1][1]) > 0, "right cluster results reached DRAM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

