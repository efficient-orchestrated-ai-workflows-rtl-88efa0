// Self-checking test of the mesh router: all five inputs inject random flits to random
// destinations while outputs are randomly stalled. Every flit must leave exactly once, on the
// port given by X-then-Y routing from router (2,2), and flits from one input to one output
// must keep their order. The no-contention latency (input to output register) is one cycle.
module tb_mesh_router;
  import octopus_pkg::*;
  localparam int W = 2*CO_W + 12, N = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] in_v, in_rdy, out_v, out_rdy;
  logic [4:0][W-1:0] in_d, out_d;
  logic [CO_W-1:0] my_x, my_y;
  assign my_x = 4'd2;
  assign my_y = 4'd2;
  mesh_router #(.W(W)) dut (.*);

  int checks = 0, failures = 0;
  int exp_port [N*5];
  int seen [N*5];
  int last_id [5][5];
  int sent [5];
  function automatic int route(logic [CO_W-1:0] dx, logic [CO_W-1:0] dy);
    if (dx > 2) return 2;
    if (dx < 2) return 4;
    if (dy > 2) return 3;
    if (dy < 2) return 1;
    return 0;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // input drivers
  for (genvar p = 0; p < 5; p++) begin : g_in
    initial begin
      in_v[p] = 0; in_d[p] = '0; sent[p] = 0;
      wait (rst_n);
      while (sent[p] < N) begin
        logic [CO_W-1:0] dx, dy;
        int id;
        @(negedge clk);
        if (!in_v[p] || in_rdy_q[p]) begin
          if (in_v[p]) sent[p]++;
          if (sent[p] < N && $urandom_range(3) != 0) begin
            dx = CO_W'($urandom_range(4)); dy = CO_W'($urandom_range(4));
            id = p*N + sent[p];
            exp_port[id] = route(dx, dy);
            in_v[p] = 1; in_d[p] = {dx, dy, 12'(id)};
          end else in_v[p] = 0;
        end
      end
      in_v[p] = 0;
    end
  end
  logic [4:0] in_rdy_q;
  always @(posedge clk) in_rdy_q <= in_rdy & in_v;

  always @(negedge clk) out_rdy = 5'($urandom);

  int n_got = 0;
  always @(posedge clk) if (rst_n) for (int o = 0; o < 5; o++) if (out_v[o] && out_rdy[o]) begin
    int id, src;
    id = int'(out_d[o][11:0]); src = id / N;
    checks++;
    if (exp_port[id] != o) begin failures++; $display("FAIL: flit %0d on port %0d, expected %0d", id, o, exp_port[id]); end
    if (seen[id] != 0) begin failures++; $display("FAIL: flit %0d delivered twice", id); end
    if (id <= last_id[src][o]) begin failures++; $display("FAIL: order from %0d to %0d", src, o); end
    seen[id] = 1; last_id[src][o] = id; n_got++;
  end

  initial begin
    for (int i = 0; i < N*5; i++) begin seen[i] = 0; exp_port[i] = -1; end
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) last_id[i][j] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (sent[0] == N && sent[1] == N && sent[2] == N && sent[3] == N && sent[4] == N);
    repeat (100) @(posedge clk);
    begin
      int n_exp;
      n_exp = 0;
      for (int i = 0; i < N*5; i++) if (exp_port[i] >= 0) n_exp++;
      checks++;
      if (n_got != n_exp) begin failures++; $display("FAIL: %0d flits delivered, %0d sent", n_got, n_exp); end
    end
    // latency: a lone flit from W to E appears on out_v one cycle after it is accepted
    @(negedge clk); out_rdy = '1;
    begin
      int t0;
      @(negedge clk);
      force out_rdy = '1;
      in_v[4] = 1; in_d[4] = {4'd4, 4'd2, 12'd0};
      @(posedge clk); t0 = int'($time);
      @(negedge clk); in_v[4] = 0;
      while (!out_v[2]) @(posedge clk);
      checks++;
      if ((int'($time) - t0) / 10 > 1) begin failures++; $display("FAIL: latency %0d", (int'($time) - t0) / 10); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
