// Data port of a CBU: the data router port (a mesh_router of the data network) and the
// network interface between it and the TF Queue.
//  Receive: a flit addressed to this CBU is pushed into TF Queue queue flit.q.
//  Send: a move request (move_t) from the Dynamic Sub-OWG Balancer or from the host bus
//  pops packets of queue src_q and sends them as flits to queue dq of CBU (dx,dy). At least
//  cnt packets are moved, then the move continues up to the end of the current stream so that
//  streams are normally kept whole; it ends early whenever the queue runs empty (the local
//  TBUs pop the same queue, so the rest of a stream may already have been consumed here).
// The balancer has priority over the host. Mesh links are indexed N, E, S, W.
// The port is named by the paper; the move protocol is this design's choice.
// Lint notes: the coordinate bits of a received flit are not needed once it has arrived; rst_n also gates the assertions.
module cbu_data_port import octopus_pkg::*; (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [CO_W-1:0]       my_x,
  input  logic [CO_W-1:0]       my_y,
  // data network links N, E, S, W
  input  logic [3:0]            ln_in_v,
  input  dflit_t [3:0]          ln_in_d,
  output logic [3:0]            ln_in_rdy,
  output logic [3:0]            ln_out_v,
  output dflit_t [3:0]          ln_out_d,
  input  logic [3:0]            ln_out_rdy,
  // TF Queue client
  output logic                  push_v,
  output logic [QID_W-1:0]      push_q,
  output tf_word_t              push_w,
  input  logic                  push_rdy,
  output logic                  pop_req,
  output logic [QID_W-1:0]      pop_q,
  input  logic                  pop_gnt,
  input  logic                  pop_rv,
  input  tf_word_t              pop_rd,
  input  logic [NQ-1:0]         q_empty,
  // move requests
  input  logic                  bal_mv_v,
  input  move_t                 bal_mv,
  output logic                  bal_mv_rdy,
  input  logic                  host_mv_v,
  input  move_t                 host_mv,
  output logic                  host_mv_rdy,
  output logic                  busy,
  output logic [15:0]           n_moved,
  output logic [15:0]           n_recv
);
  localparam int FW = $bits(dflit_t);
  logic [4:0] r_in_v, r_in_rdy, r_out_v, r_out_rdy;
  logic [4:0][FW-1:0] r_in_d, r_out_d;
  dflit_t rx, tx;
  logic tx_v;
  move_t mv;
  logic in_stream, pend;

  mesh_router #(.W(FW)) u_rt (
    .clk, .rst_n, .my_x, .my_y, .in_v(r_in_v), .in_d(r_in_d), .in_rdy(r_in_rdy),
    .out_v(r_out_v), .out_d(r_out_d), .out_rdy(r_out_rdy));

  always_comb begin
    r_in_v = {ln_in_v, tx_v};
    r_in_d[0] = tx;
    for (int d = 0; d < 4; d++) begin
      r_in_d[d+1]   = ln_in_d[d];
      ln_out_d[d]   = dflit_t'(r_out_d[d+1]);
    end
    ln_in_rdy = r_in_rdy[4:1];
    ln_out_v  = r_out_v[4:1];
    r_out_rdy = {ln_out_rdy, push_rdy};
  end

  // receive
  assign rx     = dflit_t'(r_out_d[0]);
  assign push_v = r_out_v[0];
  assign push_q = rx.q;
  assign push_w = rx.w;

  // send
  assign bal_mv_rdy  = !busy;
  assign host_mv_rdy = !busy && !bal_mv_v;
  assign pop_q   = mv.src_q;
  assign pop_req = busy && !pend && !tx_v && (mv.cnt != 0 || in_stream) && !q_empty[mv.src_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; mv <= '0; in_stream <= 1'b0; pend <= 1'b0; tx_v <= 1'b0; tx <= '0;
      n_moved <= '0; n_recv <= '0;
    end else begin
      if (push_v && push_rdy) n_recv <= n_recv + 1'b1;
      if (tx_v && r_in_rdy[0]) tx_v <= 1'b0;
      if (!busy) begin
        if (bal_mv_v)       begin mv <= bal_mv;  busy <= 1'b1; end
        else if (host_mv_v) begin mv <= host_mv; busy <= 1'b1; end
      end else begin
        if (pop_req && pop_gnt) begin
          pend <= 1'b1;
          if (mv.cnt != 0) mv.cnt <= mv.cnt - 1'b1;
        end
        if (pop_rv) begin
          pend <= 1'b0;
          tx_v <= 1'b1;
          tx   <= '{dx: mv.dx, dy: mv.dy, q: mv.dq, w: pop_rd};
          in_stream <= !pop_rd.last;
          n_moved <= n_moved + 1'b1;
        end else if (!pend && !tx_v && !(pop_req && pop_gnt) &&
                     ((mv.cnt == 0 && !in_stream) || q_empty[mv.src_q]))
          busy <= 1'b0;
      end
    end
  end
endmodule
