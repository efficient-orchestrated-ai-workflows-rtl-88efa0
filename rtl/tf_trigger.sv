// Task Flow Trigger of a TBU. It receives schedule responses (tbu_cmd_t) from the control
// switch port. A response with sw=1 and an index other than the running one starts a
// reconfiguration: the trigger stops the data plane (run low), waits until the data port
// reports that all fetched packets have been processed and delivered (exec_idle), then reads
// the ROWS PE-row words of the new configuration from the configuration memory, one per
// cycle, writes them into the compute fabric (cfg_we one cycle after each read, cfg_clr with
// the first row) and raises run again. A reconfiguration therefore takes ROWS+2 cycles after
// the drain. Every response, switch or not, pulses resp so the status checker re-arms.
// The trigger's role (take the index, reconfigure the data plane, start it) is the paper's;
// the drain-then-load sequence is this design's choice.
module tf_trigger import octopus_pkg::*; #(
  parameter int ROWS = 32,
  localparam int RW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  tbu_cmd_t          cmd,
  output logic              cmd_ready,
  input  logic              exec_idle,
  output logic              cm_rd_en,
  output logic [CIDX_W-1:0] cm_rd_idx,
  output logic [RW-1:0]     cm_rd_row,
  output logic              cfg_we,
  output logic [RW-1:0]     cfg_row,
  output logic              cfg_clr,
  output logic              run,
  output logic              configured,
  output logic [CIDX_W-1:0] cur_idx,
  output logic              resp,
  output logic [15:0]       n_reconfig
);
  typedef enum logic [1:0] {S_IDLE, S_DRAIN, S_LOAD, S_RUN} st_e;
  st_e st;
  logic [RW-1:0] row;
  logic [CIDX_W-1:0] nxt;
  logic last_row;

  assign cmd_ready = (st == S_IDLE) || (st == S_RUN);
  assign run       = (st == S_RUN);
  assign cm_rd_en  = (st == S_LOAD);
  assign cm_rd_idx = nxt;
  assign cm_rd_row = row;
  assign last_row  = (row == RW'(ROWS-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; row <= '0; nxt <= '0; cur_idx <= '0; configured <= 1'b0;
      cfg_we <= 1'b0; cfg_row <= '0; cfg_clr <= 1'b0; resp <= 1'b0; n_reconfig <= '0;
    end else begin
      resp    <= 1'b0;
      cfg_we  <= cm_rd_en;
      cfg_row <= row;
      cfg_clr <= cm_rd_en && (row == '0);
      case (st)
        S_IDLE, S_RUN: if (cmd.valid) begin
          resp <= 1'b1;
          if (cmd.sw && (!configured || cmd.idx != cur_idx)) begin
            nxt <= cmd.idx;
            st  <= S_DRAIN;
          end
        end
        S_DRAIN: if (exec_idle) begin st <= S_LOAD; row <= '0; end
        S_LOAD: begin
          row <= row + 1'b1;
          if (last_row) begin
            st <= S_RUN; cur_idx <= nxt; configured <= 1'b1;
            n_reconfig <= n_reconfig + 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
