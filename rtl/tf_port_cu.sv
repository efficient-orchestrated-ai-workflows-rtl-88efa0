// Task Flow Port Control Unit of one chip edge. Host transfer commands (target port index
// plus tfp_cmd_t) enter a four-entry FIFO and are handed in order to the addressed TF port
// when that port is free; a command for a busy port waits at the head. It counts the loads
// completed by its ports (n_done). The paper shows this unit beside each column of TF ports;
// its queueing is this design's choice.
// Lint notes: the command FIFO occupancy is not needed.
module tf_port_cu import octopus_pkg::*; #(
  parameter int NP = 8,
  localparam int PW = (NP > 1) ? $clog2(NP) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               hc_v,
  input  logic [PW-1:0]      hc_port,
  input  tfp_cmd_t           hc_cmd,
  output logic               hc_rdy,
  output logic [NP-1:0]      p_cmd_v,
  output tfp_cmd_t           p_cmd,
  input  logic [NP-1:0]      p_cmd_rdy,
  input  logic [NP-1:0]      p_done,
  output logic [15:0]        n_done,
  output logic               idle
);
  localparam int EW = PW + $bits(tfp_cmd_t);
  logic [EW-1:0] head;
  logic empty, full, pop;
  logic [2:0] cnt;
  logic [PW-1:0] hp;

  sync_fifo #(.W(EW), .DEPTH(4)) u_cq (
    .clk, .rst_n, .push(hc_v && !full), .wr_data({hc_port, hc_cmd}), .pop, .rd_data(head),
    .empty, .full, .count(cnt));
  assign hc_rdy = !full;
  assign hp     = head[EW-1 -: PW];
  assign p_cmd  = tfp_cmd_t'(head[$bits(tfp_cmd_t)-1:0]);
  always_comb begin
    p_cmd_v = '0;
    p_cmd_v[hp] = !empty;
  end
  assign pop  = !empty && p_cmd_rdy[hp];
  assign idle = empty && (&p_cmd_rdy);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_done <= '0;
    else n_done <= n_done + 16'($countones(p_done));
  end
endmodule
