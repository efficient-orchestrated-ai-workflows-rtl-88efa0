// Task Block Processing Unit. Data flow plane: data switch port (stream engine), TBU SRAM
// staging buffer and the ROWS x COLS compute fabric. Control flow plane: TB Status Checker,
// control switch port, TF Trigger and configuration memory.
// Operation: the TF Trigger loads a TB configuration and starts the data plane, which streams
// packets from a queue of one corner CBU through the fabric into a queue of a corner CBU.
// When the input runs dry or the output backs up for TH cycles the status checker reports to
// the CBU holding the input queue; its Adaptive TBU Scheduler answers with a configuration
// index, and the TF Trigger drains and reloads the fabric (Fig. 7 flow of the paper).
// Configuration arrives on the host bus: CK_TBU_HDR (addr = index), CK_TBU_ROW
// (addr[15:8] = index, addr[7:0] = row) and CK_TBU_START (addr = index) for unit (x,y).
// Lint notes: the configured flag and the staging occupancy are status only and not used; rst_n also gates the assertions.
module tbu import octopus_pkg::*; #(
  parameter int ROWS      = 32,
  parameter int COLS      = 32,
  parameter int SRAM_DEPTH = 1048576,
  parameter int PREFETCH  = 8,
  parameter int TH        = 16,
  localparam int RW       = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [CO_W-1:0]       my_x,
  input  logic [CO_W-1:0]       my_y,
  input  cfg_bus_t              cfg,
  // data links to the corner CBUs
  output logic [3:0]            pop_req,
  output logic [3:0][QID_W-1:0] pop_q,
  input  logic [3:0]            pop_gnt,
  input  logic [3:0]            pop_rv,
  input  tf_word_t [3:0]        pop_rd,
  output logic [3:0]            push_v,
  output logic [3:0][QID_W-1:0] push_q,
  output tf_word_t              push_w,
  input  logic [3:0]            push_rdy,
  // control links to the corner CBUs
  output tbu_rpt_t [3:0]        rpt_o,
  input  logic [3:0]            rpt_rdy,
  input  tbu_cmd_t [3:0]        cmd_i,
  output logic [3:0]            cmd_rdy,
  // status
  output logic                  run,
  output logic [CIDX_W-1:0]     cur_idx,
  output logic                  done_stream,
  output logic [15:0]           n_reconfig,
  output logic [15:0]           n_idle,
  output logic [15:0]           n_congested
);
  logic sel;
  assign sel = cfg.valid && cfg.x == my_x && cfg.y == my_y;

  // configuration memory
  tb_hdr_t hdr;
  logic cm_rd_en, configured;
  logic [CIDX_W-1:0] cm_rd_idx;
  logic [RW-1:0] cm_rd_row, f_row;
  logic [COLS*PE_CFG_W-1:0] cm_rd_data;
  config_memory #(.ROWS(ROWS), .COLS(COLS)) u_cm (
    .clk, .rst_n,
    .hdr_we(sel && cfg.kind == CK_TBU_HDR), .row_we(sel && cfg.kind == CK_TBU_ROW),
    .w_idx(cfg.kind == CK_TBU_ROW ? cfg.addr[8 +: CIDX_W] : cfg.addr[CIDX_W-1:0]),
    .w_row(cfg.addr[RW-1:0]), .w_data(cfg.data[COLS*PE_CFG_W-1:0]),
    .rd_en(cm_rd_en), .rd_idx(cm_rd_idx), .rd_row(cm_rd_row), .rd_data(cm_rd_data),
    .hdr_idx(cur_idx), .hdr(hdr));

  // control plane
  tbu_rpt_t rpt;
  logic rpt_ready, resp, trig_ready, f_we, f_clr, exec_idle, starved, blocked;
  tbu_cmd_t cmd, host_cmd;
  assign host_cmd = '{valid: sel && cfg.kind == CK_TBU_START, sw: 1'b1, idx: cfg.addr[CIDX_W-1:0]};

  tbu_control_port u_cp (
    .clk, .rst_n, .rpt, .rpt_ready, .dst_dir(hdr.in_dir), .rpt_o, .rpt_rdy, .cmd_i, .cmd_rdy,
    .host_cmd, .cmd, .cmd_ready(trig_ready));

  tf_trigger #(.ROWS(ROWS)) u_trig (
    .clk, .rst_n, .cmd, .cmd_ready(trig_ready), .exec_idle, .cm_rd_en, .cm_rd_idx, .cm_rd_row,
    .cfg_we(f_we), .cfg_row(f_row), .cfg_clr(f_clr), .run, .configured, .cur_idx, .resp,
    .n_reconfig);

  tb_status_checker #(.TH(TH)) u_chk (
    .clk, .rst_n, .run, .starved, .blocked, .cur_idx, .rpt, .rpt_ready, .resp,
    .n_idle, .n_congested);

  // data plane
  logic st_push, st_empty, st_pop, st_rv, st_full;
  tf_word_t st_wword, st_rword;
  logic f_in_v, f_out_v;
  logic [DATA_W-1:0] f_in_d, f_out_d;
  logic [$clog2(SRAM_DEPTH):0] st_count;

  tbu_data_port #(.PREFETCH(PREFETCH), .OD(ROWS+COLS+4)) u_dp (
    .clk, .rst_n, .run, .hdr, .pop_req, .pop_q, .pop_gnt, .pop_rv, .pop_rd,
    .push_v, .push_q, .push_w, .push_rdy, .st_push, .st_wword, .st_empty, .st_pop, .st_rv,
    .st_rword, .f_in_v, .f_in_d, .f_out_v, .f_out_d, .starved, .blocked, .exec_idle,
    .done_stream);

  tbu_sram #(.DEPTH(SRAM_DEPTH)) u_sram (
    .clk, .rst_n, .push(st_push), .wr_word(st_wword), .full(st_full), .pop_req(st_pop),
    .pop_rv(st_rv), .pop_word(st_rword), .empty(st_empty), .count(st_count));

  compute_fabric #(.ROWS(ROWS), .COLS(COLS)) u_fab (
    .clk, .rst_n, .cfg_we(f_we), .cfg_row(f_row), .cfg_data(cm_rd_data), .cfg_clr(f_clr),
    .in_valid(f_in_v), .in_data(f_in_d), .out_valid(f_out_v), .out_data(f_out_d));

  always_ff @(posedge clk) if (rst_n) assert (!(st_push && st_full)) else $error("tbu: staging overflow");
endmodule
