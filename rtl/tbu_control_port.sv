// Control switch port of a TBU: the control-flow links to its four corner CBUs.
// Outgoing: a status report from the TB Status Checker is latched and sent to the CBU that
// holds the running TB's input queue (dst_dir), with a valid/ready handshake per link.
// Incoming: schedule responses from the four CBUs, plus a start command from the host
// configuration bus, are arbitrated (host first, then NW, NE, SW, SE) into a one-entry
// register that the TF Trigger consumes. Each direction adds one cycle.
// The port and its four directions are the paper's; handshake and priority are this
// design's choice.
module tbu_control_port import octopus_pkg::*; (
  input  logic           clk,
  input  logic           rst_n,
  input  tbu_rpt_t       rpt,
  output logic           rpt_ready,
  input  diag_e          dst_dir,
  output tbu_rpt_t [3:0] rpt_o,
  input  logic [3:0]     rpt_rdy,
  input  tbu_cmd_t [3:0] cmd_i,
  output logic [3:0]     cmd_rdy,
  input  tbu_cmd_t       host_cmd,
  output tbu_cmd_t       cmd,
  input  logic           cmd_ready
);
  tbu_rpt_t slot;
  diag_e    slot_dir;
  logic     take;

  assign rpt_ready = !slot.valid;
  always_comb begin
    rpt_o = '0;
    rpt_o[slot_dir] = slot;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0; slot_dir <= DIR_NW;
    end else if (slot.valid) begin
      if (rpt_rdy[slot_dir]) slot.valid <= 1'b0;
    end else if (rpt.valid) begin
      slot <= rpt; slot_dir <= dst_dir;
    end
  end

  assign take = !cmd.valid || cmd_ready;
  always_comb begin
    cmd_rdy = '0;
    if (take && !host_cmd.valid)
      for (int d = 3; d >= 0; d--)
        if (cmd_i[d].valid) begin cmd_rdy = '0; cmd_rdy[d] = 1'b1; end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cmd <= '0;
    else if (take) begin
      cmd <= '0;
      if (host_cmd.valid) cmd <= host_cmd;
      else for (int d = 0; d < 4; d++) if (cmd_rdy[d]) cmd <= cmd_i[d];
    end
  end
endmodule
