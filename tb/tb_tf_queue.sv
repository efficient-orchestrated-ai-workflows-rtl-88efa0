// Self-checking test of the TF Queue (8 queues in 4 banks, 16 entries each for speed): six
// clients push and pop random queues every cycle. A software model of the eight FIFOs checks
// every popped word (data one cycle after the grant), the occupancy counts and the full and
// empty flags, and that no bank grants two pushes or two pops in a cycle.
module tb_tf_queue;
  import octopus_pkg::*;
  localparam int NBANK = 4, QDEPTH = 16, NPORT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NPORT-1:0] push_v, push_rdy, pop_req, pop_gnt, pop_rv;
  logic [NPORT-1:0][QID_W-1:0] push_q, pop_q;
  tf_word_t [NPORT-1:0] push_w, pop_rd;
  logic [NQ-1:0][LOAD_W-1:0] cnt;
  logic [NQ-1:0] empty, full;
  tf_queue #(.NBANK(NBANK), .QDEPTH(QDEPTH), .NPORT(NPORT)) dut (.*);

  int checks = 0, failures = 0;
  tf_word_t mq [NQ][$];
  tf_word_t expw [NPORT];
  int seq = 0, n_pop = 0, n_full = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    logic [NBANK-1:0] wb, rb;
    wb = '0; rb = '0;
    for (int p = 0; p < NPORT; p++) if (pop_rv[p]) begin
      checks++;
      if (pop_rd[p] !== expw[p]) begin
        failures++;
        if (failures < 5) $display("FAIL: port %0d popped %h expected %h", p, pop_rd[p], expw[p]);
      end
    end
    for (int q = 0; q < NQ; q++) begin
      checks++;
      if (int'(cnt[q]) != mq[q].size() || empty[q] != (mq[q].size() == 0) || full[q] != (mq[q].size() == QDEPTH)) begin
        failures++; if (failures < 5) $display("FAIL: queue %0d count %0d model %0d", q, cnt[q], mq[q].size());
      end
      if (full[q]) n_full++;
    end
    for (int p = 0; p < NPORT; p++) if (pop_gnt[p]) begin
      if (rb[int'(pop_q[p]) % NBANK]) begin failures++; $display("FAIL: two pops on one bank"); end
      rb[int'(pop_q[p]) % NBANK] = 1'b1;
      expw[p] = mq[pop_q[p]].pop_front(); n_pop++;
    end
    for (int p = 0; p < NPORT; p++) if (push_v[p] && push_rdy[p]) begin
      if (wb[int'(push_q[p]) % NBANK]) begin failures++; $display("FAIL: two pushes on one bank"); end
      wb[int'(push_q[p]) % NBANK] = 1'b1;
      mq[push_q[p]].push_back(push_w[p]);
    end
  end

  initial begin
    push_v = '0; pop_req = '0; push_q = '0; pop_q = '0; push_w = '0;
    for (int p = 0; p < NPORT; p++) expw[p] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      for (int p = 0; p < NPORT; p++) begin
        // phases: fill (mostly push), drain (mostly pop), mixed
        int pp, pq;
        pp = (t < 1500) ? 3 : (t < 3000) ? 1 : 2;
        pq = (t < 1500) ? 1 : (t < 3000) ? 3 : 2;
        push_v[p] = $urandom_range(3) < pp;
        push_q[p] = QID_W'($urandom_range(NQ-1));
        push_w[p] = '{last: 1'($urandom), tag: TAG_W'(p), data: DATA_W'(seq)};
        seq++;
        pop_req[p] = $urandom_range(3) < pq;
        pop_q[p] = QID_W'($urandom_range(NQ-1));
      end
    end
    @(negedge clk); push_v = '0; pop_req = '0;
    repeat (3) @(posedge clk);
    checks++;
    if (n_full == 0 || n_pop < 1000) begin failures++; $display("FAIL: coverage full=%0d pops=%0d", n_full, n_pop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
