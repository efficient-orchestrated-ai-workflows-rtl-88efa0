// Simple dual-port SRAM array: one synchronous write port and one synchronous read port
// (read data one cycle after the request). Used for the TF Queue banks and the TBU SRAM.
// Contents are not reset, as in an SRAM macro; a read of the address written in the same
// cycle returns the old word. This is this design's generic memory, not a vendor macro.
module sram_2p #(
  parameter int W     = 32,
  parameter int DEPTH = 1024,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
