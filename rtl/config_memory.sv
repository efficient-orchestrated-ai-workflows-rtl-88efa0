// Configuration memory of a TBU. It holds NCFG task-block configurations; each is a header
// (tb_hdr_t: source and destination queue, issue interval, sub-OWG) and ROWS PE-row words of
// COLS x 16 bits. Written by the host configuration bus; read by the TF Trigger one row per
// cycle (rd_en/rd_idx/rd_row, data one cycle later). The header of any index is read without
// delay from a small register table. The paper shows this memory as a block of the TBU; its
// organisation is this design's choice.
module config_memory import octopus_pkg::*; #(
  parameter int ROWS = 32,
  parameter int COLS = 32,
  localparam int RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int DW  = COLS*PE_CFG_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              hdr_we,
  input  logic              row_we,
  input  logic [CIDX_W-1:0] w_idx,
  input  logic [RW-1:0]     w_row,
  input  logic [DW-1:0]     w_data,
  input  logic              rd_en,
  input  logic [CIDX_W-1:0] rd_idx,
  input  logic [RW-1:0]     rd_row,
  output logic [DW-1:0]     rd_data,
  input  logic [CIDX_W-1:0] hdr_idx,
  output tb_hdr_t           hdr
);
  logic [DW-1:0] rows [NCFG*ROWS];
  tb_hdr_t       hdrs [NCFG];

  always_ff @(posedge clk) begin
    if (row_we) rows[w_idx*ROWS + int'(w_row)] <= w_data;
    if (rd_en)  rd_data <= rows[rd_idx*ROWS + int'(rd_row)];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < NCFG; i++) hdrs[i] <= '0;
    else if (hdr_we) hdrs[w_idx] <= tb_hdr_t'(w_data[$bits(tb_hdr_t)-1:0]);
  end
  assign hdr = hdrs[hdr_idx];
endmodule
