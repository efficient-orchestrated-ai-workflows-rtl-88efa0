// Self-checking test of the compute fabric at its full 32 x 32 size: random PE configurations
// (every operation and operand source, register writes off) are loaded one row per cycle,
// then random packets are streamed one per cycle. Every output is compared with a software
// model of the mesh, and the latency of the first packet must be ROWS+COLS-1 cycles.
module tb_compute_fabric;
  import octopus_pkg::*;
  localparam int ROWS = 32, COLS = 32, RW = $clog2(ROWS), NPKT = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we, cfg_clr, in_valid, out_valid;
  logic [RW-1:0] cfg_row;
  logic [COLS*PE_CFG_W-1:0] cfg_data;
  logic [DATA_W-1:0] in_data, out_data;
  compute_fabric #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  pe_cfg_t cf [ROWS][COLS];
  logic [DATA_W-1:0] exp_q [$];

  function automatic logic [DATA_W-1:0] sel(pe_src_e s, logic [DATA_W-1:0] w, logic [DATA_W-1:0] n, logic [6:0] imm);
    case (s)
      SRC_W: return w;
      SRC_N: return n;
      SRC_REG: return '0;
      default: return DATA_W'(imm);
    endcase
  endfunction
  function automatic logic [DATA_W-1:0] op(pe_op_e o, logic [DATA_W-1:0] a, logic [DATA_W-1:0] b);
    case (o)
      OP_ADD: return a + b;  OP_SUB: return a - b;  OP_MUL: return a * b;
      OP_AND: return a & b;  OP_OR: return a | b;   OP_XOR: return a ^ b;
      OP_SHL: return a << b[4:0]; OP_SHR: return a >> b[4:0];
      OP_MAX: return (a > b) ? a : b; OP_MIN: return (a < b) ? a : b;
      default: return a;
    endcase
  endfunction
  function automatic logic [DATA_W-1:0] model(logic [DATA_W-1:0] x);
    logic [DATA_W-1:0] v [ROWS][COLS];
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        logic [DATA_W-1:0] w, n;
        w = (c == 0) ? x : v[r][c-1];
        n = (r == 0) ? '0 : v[r-1][c];
        v[r][c] = op(cf[r][c].op, sel(cf[r][c].a, w, n, cf[r][c].imm), sel(cf[r][c].b, w, n, cf[r][c].imm));
      end
    return v[ROWS-1][COLS-1];
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int t_in, t_out, n_out;
  initial begin
    cfg_we = 0; cfg_clr = 0; in_valid = 0; cfg_row = '0; cfg_data = '0; in_data = '0;
    n_out = 0; t_in = -1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        // information-preserving operations so that results do not collapse to constants
        case ($urandom_range(7))
          0: cf[r][c].op = OP_ADD;
          1: cf[r][c].op = OP_SUB;
          2: cf[r][c].op = OP_XOR;
          3: cf[r][c].op = OP_MUL;
          4: cf[r][c].op = OP_XOR;
          5: cf[r][c].op = OP_ADD;
          default: cf[r][c].op = OP_PASS;
        endcase
        cf[r][c].a = ($urandom_range(1) == 0) ? SRC_W : SRC_N;
        cf[r][c].b = ($urandom_range(1) == 0) ? SRC_IMM : (cf[r][c].a == SRC_W ? SRC_N : SRC_W);
        if (cf[r][c].op == OP_MUL || cf[r][c].op == OP_SHL) cf[r][c].b = SRC_IMM;
        cf[r][c].wr_reg = 1'b0;
        cf[r][c].imm = 7'($urandom) | 7'd1;
        if (cf[r][c].op == OP_SHL) cf[r][c].imm = 7'd1;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      cfg_we = 1; cfg_row = RW'(r); cfg_clr = (r == 0);
      for (int c = 0; c < COLS; c++) cfg_data[c*PE_CFG_W +: PE_CFG_W] = PE_CFG_W'(cf[r][c]);
    end
    @(negedge clk); cfg_we = 0; cfg_clr = 0;
    for (int k = 0; k < NPKT; k++) begin
      logic [DATA_W-1:0] x;
      @(negedge clk);
      x = $urandom;
      in_valid = ($urandom_range(3) != 0) || k == 0;
      in_data = x;
      if (in_valid) begin exp_q.push_back(model(x)); if (t_in < 0) t_in = int'($time / 10); end
    end
    @(negedge clk); in_valid = 0;
    repeat (ROWS + COLS + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_out == 0) begin failures++; $display("FAIL: %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [DATA_W-1:0] e;
    checks++;
    if (n_out == 0) begin
      t_out = int'($time / 10);
      checks++;
      if (t_out - t_in != ROWS + COLS - 1) begin
        failures++; $display("FAIL: latency %0d, expected %0d", t_out - t_in, ROWS + COLS - 1);
      end
    end
    n_out++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
    else begin
      e = exp_q.pop_front();
      if (e !== out_data) begin failures++; if (failures < 5) $display("FAIL: out %h expected %h", out_data, e); end
    end
  end
endmodule
