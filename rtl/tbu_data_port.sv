// Data switch port and stream engine of a TBU. Ports are indexed by corner direction as seen
// from the TBU (diag_e: NW, NE, SW, SE), one set per adjacent CBU.
// While run is high, for the running TB header:
//  * fetch: requests packets from queue hdr.in_q of the CBU at hdr.in_dir (pop_req/pop_gnt,
//    data on pop_rv one cycle after the grant) and stores them in the TBU SRAM staging buffer,
//    keeping at most PREFETCH packets fetched but not yet issued;
//  * issue: reads the staging buffer and feeds one packet to the compute fabric every
//    hdr.ii cycles, plus data[31:28] more cycles when hdr.dyn is set (data-dependent
//    execution time). The packet's tag and last flag wait in a meta FIFO for the result;
//  * deliver: results go to an output FIFO and are pushed to queue hdr.out_q of the CBU at
//    hdr.out_dir. Issue stops when the packets in flight would not fit the output FIFO.
// starved: nothing left to fetch or issue; blocked: output waiting on a full queue; exec_idle:
// nothing fetched, in flight or waiting, so the TB may be switched. done_stream pulses when
// the last packet of a stream leaves. Streaming between CBU queues through the PE array is
// the paper's; the prefetch, credit and interval scheme is this design's choice.
// Lint notes: the header's sub-OWG bits are not used by the data path and the meta FIFO full flag is never reached because of the credit check; rst_n also gates the assertions.
module tbu_data_port import octopus_pkg::*; #(
  parameter int PREFETCH = 8,
  parameter int OD       = 64     // output FIFO depth, at least the fabric latency
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  run,
  input  tb_hdr_t               hdr,
  // CBU queues, per corner
  output logic [3:0]            pop_req,
  output logic [3:0][QID_W-1:0] pop_q,
  input  logic [3:0]            pop_gnt,
  input  logic [3:0]            pop_rv,
  input  tf_word_t [3:0]        pop_rd,
  output logic [3:0]            push_v,
  output logic [3:0][QID_W-1:0] push_q,
  output tf_word_t              push_w,
  input  logic [3:0]            push_rdy,
  // TBU SRAM staging buffer
  output logic                  st_push,
  output tf_word_t              st_wword,
  input  logic                  st_empty,
  output logic                  st_pop,
  input  logic                  st_rv,
  input  tf_word_t              st_rword,
  // compute fabric
  output logic                  f_in_v,
  output logic [DATA_W-1:0]     f_in_d,
  input  logic                  f_out_v,
  input  logic [DATA_W-1:0]     f_out_d,
  // status
  output logic                  starved,
  output logic                  blocked,
  output logic                  exec_idle,
  output logic                  done_stream
);
  localparam int MW = 1 + TAG_W;
  localparam int CW = $clog2(OD) + 1;
  logic [$clog2(PREFETCH+1)-1:0] held;
  logic        cbu_pend;
  logic [11:0] cool, nc;
  logic [7:0]  ii1;
  logic        credit, do_pop;
  logic [MW-1:0] m_head;
  logic        m_empty, m_full, o_empty, o_full;
  logic [CW-1:0] m_cnt, o_cnt;
  tf_word_t    o_head, o_in;
  logic        o_pop;

  // ---- fetch from the CBU queue
  always_comb begin
    pop_req = '0;
    for (int d = 0; d < 4; d++) pop_q[d] = hdr.in_q;
    pop_req[hdr.in_dir] = run && (32'(held) < PREFETCH);
  end
  assign st_push  = pop_rv[hdr.in_dir];
  assign st_wword = pop_rd[hdr.in_dir];

  // ---- issue into the fabric
  assign ii1    = (hdr.ii == 0) ? 8'd1 : hdr.ii;
  assign nc     = 12'(ii1) - 12'd1 + (hdr.dyn ? 12'(st_rword.data[31:28]) : 12'd0);
  assign credit = (32'(m_cnt) + 32'(o_cnt) + 32'(st_rv) + 1) <= OD;
  assign do_pop = run && !st_empty && credit && (st_rv ? (nc == 0) : (cool == 0));
  assign st_pop = do_pop;
  assign f_in_v = st_rv;
  assign f_in_d = st_rword.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held <= '0; cbu_pend <= 1'b0; cool <= '0;
    end else begin
      cbu_pend <= pop_req[hdr.in_dir] && pop_gnt[hdr.in_dir];
      held <= held + $bits(held)'(pop_req[hdr.in_dir] && pop_gnt[hdr.in_dir])
                   - $bits(held)'(do_pop);
      if (st_rv) cool <= nc;
      else if (cool != 0) cool <= cool - 1'b1;
    end
  end

  sync_fifo #(.W(MW), .DEPTH(OD)) u_meta (
    .clk, .rst_n, .push(st_rv), .wr_data({st_rword.last, st_rword.tag}),
    .pop(f_out_v), .rd_data(m_head), .empty(m_empty), .full(m_full), .count(m_cnt));

  assign o_in = '{last: m_head[MW-1], tag: m_head[TAG_W-1:0], data: f_out_d};
  sync_fifo #(.W($bits(tf_word_t)), .DEPTH(OD)) u_out (
    .clk, .rst_n, .push(f_out_v), .wr_data(o_in), .pop(o_pop), .rd_data(o_head),
    .empty(o_empty), .full(o_full), .count(o_cnt));

  // ---- deliver to the CBU queue
  always_comb begin
    push_v = '0;
    for (int d = 0; d < 4; d++) push_q[d] = hdr.out_q;
    push_v[hdr.out_dir] = !o_empty;
  end
  assign push_w      = o_head;
  assign o_pop       = !o_empty && push_rdy[hdr.out_dir];
  assign done_stream = o_pop && o_head.last;

  assign starved   = run && st_empty && !cbu_pend && !st_rv && (held == 0);
  assign blocked   = run && !o_empty && !push_rdy[hdr.out_dir];
  assign exec_idle = (held == 0) && !cbu_pend && st_empty && !st_rv && m_empty && o_empty;

  always_ff @(posedge clk) if (rst_n) begin
    assert (!(f_out_v && m_empty)) else $error("tbu_data_port: result without meta");
    assert (!(f_out_v && o_full))  else $error("tbu_data_port: output overflow");
  end
endmodule
