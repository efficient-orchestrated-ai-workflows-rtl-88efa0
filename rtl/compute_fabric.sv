// Compute fabric of a TBU: a ROWS x COLS mesh of PEs (32 x 32 = 1024 PEs by default).
// Every PE takes its west operand from the PE to its left and its north operand from the PE
// above, so a packet flows as a diagonal wavefront. The input word enters every row at
// column 0; a delay chain skews row r by r cycles so that the north and west operands of each
// PE belong to the same packet. The result is the output of the bottom-right PE, ROWS+COLS-1
// cycles after the input (fully pipelined, one packet per cycle). Row 0 sees 0 as its north
// operand. Configuration is written one row per cycle (cfg_we, cfg_row, cfg_data) into the
// PE configuration registers; cfg_clr zeroes the PE registers.
// Each PE is an ALU, one register and a configuration word: with valid input it computes
// op(A,B), A and B chosen from west, north, its register or a 7-bit constant, and registers
// the result towards east and south (one cycle). wr_reg also keeps the result in the
// register (accumulation across packets). The PEs are written as arrays indexed by row and
// column rather than as 1024 module instances, which keeps a 64-TBU chip small enough for
// the tools to elaborate.
// The mesh of PEs with near-neighbour links and the PE parts (ALU, registers, configuration
// buffer) follow the paper; the operation set, operand selection, wavefront schedule and the
// single output point are this design's choice.
module compute_fabric import octopus_pkg::*; #(
  parameter int ROWS = 32,
  parameter int COLS = 32,
  localparam int RW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [RW-1:0]           cfg_row,
  input  logic [COLS*PE_CFG_W-1:0] cfg_data,
  input  logic                    cfg_clr,
  input  logic                    in_valid,
  input  logic [DATA_W-1:0]       in_data,
  output logic                    out_valid,
  output logic [DATA_W-1:0]       out_data
);
  pe_cfg_t           cfg_q [ROWS][COLS];
  logic              sk_v  [ROWS];
  logic [DATA_W-1:0] sk_d  [ROWS];
  logic              pv    [ROWS][COLS];
  logic [DATA_W-1:0] pd    [ROWS][COLS];
  logic [DATA_W-1:0] rg    [ROWS][COLS];
  logic [DATA_W-1:0] res   [ROWS][COLS];

  function automatic logic [DATA_W-1:0] pick(pe_src_e s, logic [DATA_W-1:0] w,
      logic [DATA_W-1:0] n, logic [DATA_W-1:0] r, logic [6:0] imm);
    case (s)
      SRC_W:   return w;
      SRC_N:   return n;
      SRC_REG: return r;
      default: return {{(DATA_W-7){1'b0}}, imm};
    endcase
  endfunction
  function automatic logic [DATA_W-1:0] alu(pe_op_e op, logic [DATA_W-1:0] a, logic [DATA_W-1:0] b);
    case (op)
      OP_ADD:  return a + b;
      OP_SUB:  return a - b;
      OP_MUL:  return a * b;
      OP_AND:  return a & b;
      OP_OR:   return a | b;
      OP_XOR:  return a ^ b;
      OP_SHL:  return a << b[4:0];
      OP_SHR:  return a >> b[4:0];
      OP_MAX:  return (a > b) ? a : b;
      OP_MIN:  return (a < b) ? a : b;
      default: return a;
    endcase
  endfunction

  always_ff @(posedge clk) begin
    if (cfg_we)
      for (int c = 0; c < COLS; c++)
        cfg_q[cfg_row][c] <= pe_cfg_t'(cfg_data[c*PE_CFG_W +: PE_CFG_W]);
  end
  assign sk_v[0] = in_valid;
  assign sk_d[0] = in_data;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int r = 1; r < ROWS; r++) begin sk_v[r] <= 1'b0; sk_d[r] <= '0; end
    else for (int r = 1; r < ROWS; r++) begin sk_v[r] <= sk_v[r-1]; sk_d[r] <= sk_d[r-1]; end

  always_comb
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        logic [DATA_W-1:0] w, n;
        w = (c == 0) ? sk_d[r] : pd[r][c-1];
        n = (r == 0) ? '0 : pd[r-1][c];
        res[r][c] = alu(cfg_q[r][c].op, pick(cfg_q[r][c].a, w, n, rg[r][c], cfg_q[r][c].imm),
                        pick(cfg_q[r][c].b, w, n, rg[r][c], cfg_q[r][c].imm));
      end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
        pv[r][c] <= 1'b0; pd[r][c] <= '0; rg[r][c] <= '0;
      end
    end else begin
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
        logic vi;
        vi = (c == 0) ? sk_v[r] : pv[r][c-1];
        pv[r][c] <= vi;
        if (vi) pd[r][c] <= res[r][c];
        if (cfg_clr) rg[r][c] <= '0;
        else if (vi && cfg_q[r][c].wr_reg) rg[r][c] <= res[r][c];
      end
    end
  assign out_valid = pv[ROWS-1][COLS-1];
  assign out_data  = pd[ROWS-1][COLS-1];
endmodule
