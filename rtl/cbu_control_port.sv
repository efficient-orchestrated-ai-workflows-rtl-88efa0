// Control port of a CBU. The control router port is a mesh_router of the control network
// (links N, E, S, W; its local port serves the Cluster CU). The control switch port links the
// CBU with its four corner TBUs (indexed NW, NE, SW, SE as seen from the CBU): status reports
// from the TBUs and schedule responses to them each pass through a one-entry register slice
// with a valid/ready handshake, adding one cycle each way.
// The two control ports are the paper's; the slices and flit format are this design's choice.
// Lint notes: rst_n also gates the assertions of the router FIFOs (reported as sync and async use; no effect).
module cbu_control_port import octopus_pkg::*; (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [CO_W-1:0] my_x,
  input  logic [CO_W-1:0] my_y,
  // control network links N, E, S, W
  input  logic [3:0]     ln_in_v,
  input  cflit_t [3:0]   ln_in_d,
  output logic [3:0]     ln_in_rdy,
  output logic [3:0]     ln_out_v,
  output cflit_t [3:0]   ln_out_d,
  input  logic [3:0]     ln_out_rdy,
  // local side (Cluster CU)
  input  logic           l_tx_v,
  input  cflit_t         l_tx,
  output logic           l_tx_rdy,
  output logic           l_rx_v,
  output cflit_t         l_rx,
  // corner TBUs
  input  tbu_rpt_t [3:0] t_rpt,
  output logic [3:0]     t_rpt_rdy,
  output tbu_cmd_t [3:0] t_cmd,
  input  logic [3:0]     t_cmd_rdy,
  // Adaptive TBU Scheduler
  output tbu_rpt_t [3:0] s_rpt,
  input  logic [3:0]     s_rpt_rdy,
  input  tbu_cmd_t [3:0] s_cmd,
  output logic [3:0]     s_cmd_rdy
);
  localparam int FW = $bits(cflit_t);
  logic [4:0] r_in_v, r_in_rdy, r_out_v, r_out_rdy;
  logic [4:0][FW-1:0] r_in_d, r_out_d;

  mesh_router #(.W(FW)) u_rt (
    .clk, .rst_n, .my_x, .my_y, .in_v(r_in_v), .in_d(r_in_d), .in_rdy(r_in_rdy),
    .out_v(r_out_v), .out_d(r_out_d), .out_rdy(r_out_rdy));

  always_comb begin
    r_in_v = {ln_in_v, l_tx_v};
    r_in_d[0] = l_tx;
    for (int d = 0; d < 4; d++) begin
      r_in_d[d+1] = ln_in_d[d];
      ln_out_d[d] = cflit_t'(r_out_d[d+1]);
    end
    ln_in_rdy = r_in_rdy[4:1];
    l_tx_rdy  = r_in_rdy[0];
    ln_out_v  = r_out_v[4:1];
    l_rx_v    = r_out_v[0];
    l_rx      = cflit_t'(r_out_d[0]);
    r_out_rdy = {ln_out_rdy, 1'b1};   // the Cluster CU always accepts
  end

  // switch port register slices
  for (genvar d = 0; d < 4; d++) begin : g_sw
    assign t_rpt_rdy[d] = !s_rpt[d].valid;
    assign s_cmd_rdy[d] = !t_cmd[d].valid;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        s_rpt[d] <= '0; t_cmd[d] <= '0;
      end else begin
        if (s_rpt[d].valid) begin if (s_rpt_rdy[d]) s_rpt[d].valid <= 1'b0; end
        else if (t_rpt[d].valid) s_rpt[d] <= t_rpt[d];
        if (t_cmd[d].valid) begin if (t_cmd_rdy[d]) t_cmd[d].valid <= 1'b0; end
        else if (s_cmd[d].valid) t_cmd[d] <= s_cmd[d];
      end
    end
  end
endmodule
