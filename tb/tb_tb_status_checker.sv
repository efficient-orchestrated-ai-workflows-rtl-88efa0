// Self-checking test of the TB Status Checker (TH = 16): a report appears exactly TH cycles
// after the input stream runs dry (idle) or the output is blocked (congested, which wins when
// both hold); a shorter gap gives no report; while a report waits for its response nothing
// new is reported; a TBU that is not running never reports. Counters are checked at the end.
module tb_tb_status_checker;
  import octopus_pkg::*;
  localparam int TH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic run, starved, blocked, rpt_ready, resp;
  logic [CIDX_W-1:0] cur_idx;
  tbu_rpt_t rpt;
  logic [15:0] n_idle, n_congested;
  tb_status_checker #(.TH(TH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // hold inputs for n cycles and return the cycle (1..n) at which rpt.valid was first seen
  task automatic hold(int n, bit st, bit bl, output int at);
    at = 0;
    starved = st; blocked = bl;
    for (int k = 1; k <= n; k++) begin
      @(posedge clk); #1;
      if (rpt.valid && at == 0) at = k;
    end
    starved = 0; blocked = 0;
  endtask
  task automatic ack();
    rpt_ready = 1; @(posedge clk); #1; rpt_ready = 0;
    repeat (2) @(posedge clk); #1;
    resp = 1; @(posedge clk); #1; resp = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int at;
    run = 0; starved = 0; blocked = 0; rpt_ready = 0; resp = 0; cur_idx = 3'd5;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    hold(40, 1, 0, at);
    check(at == 0, "no report while not running");
    run = 1;
    hold(TH - 1, 1, 0, at);
    check(at == 0, "no report after TH-1 starved cycles");
    @(posedge clk); #1;
    hold(TH + 4, 1, 0, at);
    check(at == TH, $sformatf("idle report after %0d cycles, expected %0d", at, TH));
    check(rpt.reason == RSN_IDLE && rpt.cur == 3'd5, "idle report contents");
    ack();
    hold(TH + 4, 1, 1, at);
    check(at == TH, $sformatf("congested report after %0d cycles, expected %0d", at, TH));
    check(rpt.reason == RSN_CONGESTED, "congestion has priority over idle");
    rpt_ready = 1; @(posedge clk); #1; rpt_ready = 0;
    hold(3*TH, 0, 1, at);
    check(at == 0, "no new report while waiting for the response");
    resp = 1; @(posedge clk); #1; resp = 0;
    hold(TH + 2, 0, 1, at);
    check(at == TH, "report again after the response");
    ack();
    check(n_idle == 16'd1 && n_congested == 16'd2, $sformatf("counters idle=%0d congested=%0d", n_idle, n_congested));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
