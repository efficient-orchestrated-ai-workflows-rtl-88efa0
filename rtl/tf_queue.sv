// Task Flow Queue of a CBU: NQ FIFO queues of tf_word_t kept in NBANK SRAM banks
// (4 MB in total by default: 8 queues x 131072 words of 32-bit data over 4 banks).
// Address generator: queue q lives in bank q % NBANK, region q / NBANK, and has its own
// head and tail pointers. Banking/buffering logic: NPORT clients (the four corner TBUs, the
// data port and the CB engine) may each push and pop every cycle; per bank one push and one
// pop are granted per cycle, with a rotating priority among clients, so accesses to different
// banks proceed in parallel. A push is taken when push_rdy is high in the same cycle; a pop
// request is granted (pop_gnt) only if the queue is not empty, and its data is returned on
// pop_rv/pop_rd in the next cycle. Occupancy, empty and full of every queue are outputs; the
// Adaptive TBU Scheduler and the cluster logic read them as queue status.
// The multi-bank SRAM with address generator and banking logic and its 4 MB size are the
// paper's; the queue count, port set and arbitration are this design's choice.
module tf_queue import octopus_pkg::*; #(
  parameter int NBANK  = 4,
  parameter int QDEPTH = 131072,
  parameter int NPORT  = 6,
  localparam int PW    = $clog2(QDEPTH),
  localparam int RPB   = NQ / NBANK,                 // queues per bank
  localparam int BD    = RPB * QDEPTH,
  localparam int BAW   = $clog2(BD),
  localparam int BW    = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NPORT-1:0]          push_v,
  input  logic [NPORT-1:0][QID_W-1:0] push_q,
  input  tf_word_t [NPORT-1:0]      push_w,
  output logic [NPORT-1:0]          push_rdy,
  input  logic [NPORT-1:0]          pop_req,
  input  logic [NPORT-1:0][QID_W-1:0] pop_q,
  output logic [NPORT-1:0]          pop_gnt,
  output logic [NPORT-1:0]          pop_rv,
  output tf_word_t [NPORT-1:0]      pop_rd,
  output logic [NQ-1:0][LOAD_W-1:0] cnt,
  output logic [NQ-1:0]             empty,
  output logic [NQ-1:0]             full
);
  logic [NQ-1:0][PW-1:0] head, tail;
  logic [$clog2(NPORT)-1:0] rr;
  logic [NBANK-1:0] b_we, b_re;
  logic [NBANK-1:0][BAW-1:0] b_wa, b_ra;
  tf_word_t [NBANK-1:0] b_wd, b_rd;
  logic [NQ-1:0] q_push, q_pop;
  logic [NPORT-1:0][BW-1:0] rbank;

  for (genvar q = 0; q < NQ; q++) begin : g_st
    assign empty[q] = (cnt[q] == 0);
    assign full[q]  = (cnt[q] == LOAD_W'(QDEPTH));
  end

  function automatic int bank_of(logic [QID_W-1:0] q); return int'(q) % NBANK; endfunction
  function automatic logic [BAW-1:0] addr_of(logic [QID_W-1:0] q, logic [PW-1:0] p);
    return BAW'((int'(q) / NBANK) * QDEPTH + int'(p));
  endfunction

  always_comb begin
    push_rdy = '0; pop_gnt = '0; b_we = '0; b_re = '0; b_wa = '0; b_ra = '0; b_wd = '0;
    q_push = '0; q_pop = '0;
    for (int k = 0; k < NPORT; k++) begin
      int p;
      int b;
      p = (int'(rr) + k) % NPORT;
      b = bank_of(push_q[p]);
      if (push_v[p] && !full[push_q[p]] && !b_we[b]) begin
        push_rdy[p] = 1'b1; b_we[b] = 1'b1; b_wd[b] = push_w[p];
        b_wa[b] = addr_of(push_q[p], tail[push_q[p]]); q_push[push_q[p]] = 1'b1;
      end
      b = bank_of(pop_q[p]);
      if (pop_req[p] && !empty[pop_q[p]] && !b_re[b]) begin
        pop_gnt[p] = 1'b1; b_re[b] = 1'b1;
        b_ra[b] = addr_of(pop_q[p], head[pop_q[p]]); q_pop[pop_q[p]] = 1'b1;
      end
    end
  end

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    sram_2p #(.W($bits(tf_word_t)), .DEPTH(BD)) u_sram (
      .clk, .we(b_we[b]), .waddr(b_wa[b]), .wdata(b_wd[b]),
      .re(b_re[b]), .raddr(b_ra[b]), .rdata(b_rd[b]));
  end

  for (genvar p = 0; p < NPORT; p++) begin : g_rd
    assign pop_rd[p] = b_rd[rbank[p]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0; tail <= '0; cnt <= '0; rr <= '0; pop_rv <= '0; rbank <= '0;
    end else begin
      rr <= (int'(rr) == NPORT-1) ? '0 : rr + 1'b1;
      pop_rv <= pop_gnt;
      for (int p = 0; p < NPORT; p++) rbank[p] <= BW'(bank_of(pop_q[p]));
      for (int q = 0; q < NQ; q++) begin
        if (q_push[q]) tail[q] <= tail[q] + 1'b1;
        if (q_pop[q])  head[q] <= head[q] + 1'b1;
        cnt[q] <= cnt[q] + LOAD_W'(q_push[q]) - LOAD_W'(q_pop[q]);
      end
    end
  end
endmodule
