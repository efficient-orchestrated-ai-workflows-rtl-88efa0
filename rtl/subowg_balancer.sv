// Dynamic Sub-OWG Balancer of a CBU: the Diffusive Load-Balancing model.
// The input stream of sub-OWG s is queue s of the TF Queue of each CBU. Every `period`
// cycles the balancer takes a snapshot of these loads and sends one M_LOAD_XCHG control flit
// per sub-OWG to the corresponding CBU of each neighbouring cluster (N, E, S, W, as far as
// present), and one M_LOAD_RPT flit per sub-OWG to its cluster leader (unless it is the
// leader). It then waits until it has heard every sub-OWG load from every neighbour, or
// WAIT_MAX cycles, and decides for each sub-OWG: if its own load is the largest or second
// largest among itself and its neighbours, and the least loaded neighbour holds less, it asks
// the data port to move min(volume, (own - min)/2) packets (rounded up to whole streams)
// of that queue to the least loaded neighbour's same queue.
// Period, volume and the neighbour set (range) are configurable, as the paper states; the
// largest-or-second-largest rule towards the minimum neighbour is the paper's evaluated
// strategy. The message format and the wait are this design's choice.
// Lint notes: the source-coordinate bits of a received message are not needed.
module subowg_balancer import octopus_pkg::*; #(
  parameter int WAIT_MAX = 1024
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [CO_W-1:0]             my_x,
  input  logic [CO_W-1:0]             my_y,
  input  cl_cfg_t                     ccfg,
  input  logic [31:0]                 period,
  input  logic [LOAD_W-1:0]           volume,
  input  logic [NSUB-1:0][LOAD_W-1:0] loads,
  output logic                        tx_v,
  output cflit_t                      tx,
  input  logic                        tx_rdy,
  input  logic                        rx_v,
  input  cflit_t                      rx,
  output logic                        mv_v,
  output move_t                       mv,
  input  logic                        mv_rdy,
  output logic [15:0]                 n_rounds,
  output logic [15:0]                 n_rebal
);
  typedef enum logic [1:0] {S_IDLE, S_SEND, S_WAIT, S_DECIDE} st_e;
  st_e st;
  logic [31:0] timer;
  logic [$clog2(WAIT_MAX+1)-1:0] wt;
  logic [NSUB-1:0][LOAD_W-1:0] snap;
  logic [3:0][NSUB-1:0][LOAD_W-1:0] nb;
  logic [3:0][NSUB-1:0] got;
  logic [$clog2(5*NSUB+1)-1:0] k;
  logic [SUB_W:0] s;
  logic all_got;

  // flit for step k
  logic k_xchg, k_ok;
  logic [1:0] k_dir;
  logic [SUB_W-1:0] k_sub;
  always_comb begin
    k_xchg = (int'(k) < 4*NSUB);
    k_dir  = 2'((int'(k) / NSUB) % 4);
    k_sub  = SUB_W'(int'(k) % NSUB);
    k_ok   = k_xchg ? ccfg.nb_valid[k_dir] : !ccfg.leader;
    tx     = '0;
    tx.sx  = my_x; tx.sy = my_y; tx.sub = k_sub; tx.load = snap[k_sub];
    if (k_xchg) begin tx.mt = M_LOAD_XCHG; tx.dx = ccfg.nbx[k_dir]; tx.dy = ccfg.nby[k_dir]; end
    else        begin tx.mt = M_LOAD_RPT;  tx.dx = ccfg.lx;         tx.dy = ccfg.ly;         end
    tx_v = (st == S_SEND) && k_ok;
  end

  always_comb begin
    all_got = 1'b1;
    for (int d = 0; d < 4; d++) if (ccfg.nb_valid[d] && !(&got[d])) all_got = 1'b0;
  end

  // decision for sub-OWG s
  logic dec_mv;
  logic [1:0] dmin;
  logic [LOAD_W-1:0] lmin, amt;
  always_comb begin
    int bigger;
    logic have;
    bigger = 0; have = 1'b0; lmin = '0; dmin = '0;
    for (int d = 0; d < 4; d++)
      if (ccfg.nb_valid[d] && got[d][s[SUB_W-1:0]]) begin
        if (nb[d][s[SUB_W-1:0]] > snap[s[SUB_W-1:0]]) bigger++;
        if (!have || nb[d][s[SUB_W-1:0]] < lmin) begin
          have = 1'b1; lmin = nb[d][s[SUB_W-1:0]]; dmin = 2'(d);
        end
      end
    amt = (snap[s[SUB_W-1:0]] - lmin) >> 1;
    if (amt > volume) amt = volume;
    dec_mv = have && bigger <= 1 && lmin < snap[s[SUB_W-1:0]] && amt != 0;
    mv = '{src_q: QID_W'(s[SUB_W-1:0]), cnt: amt, dx: ccfg.nbx[dmin], dy: ccfg.nby[dmin],
           dq: QID_W'(s[SUB_W-1:0])};
  end
  assign mv_v = (st == S_DECIDE) && !s[SUB_W] && dec_mv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; timer <= '0; wt <= '0; snap <= '0; nb <= '0; got <= '0; k <= '0; s <= '0;
      n_rounds <= '0; n_rebal <= '0;
    end else begin
      if (rx_v && rx.mt == M_LOAD_XCHG)
        for (int d = 0; d < 4; d++)
          if (ccfg.nb_valid[d] && rx.sx == ccfg.nbx[d] && rx.sy == ccfg.nby[d]) begin
            nb[d][rx.sub]  <= rx.load;
            got[d][rx.sub] <= 1'b1;
          end
      case (st)
        S_IDLE: begin
          timer <= timer + 1;
          if (ccfg.en && timer + 1 >= period) begin
            timer <= '0; snap <= loads; k <= '0; st <= S_SEND;
            n_rounds <= n_rounds + 1'b1;
          end
        end
        S_SEND: if (!k_ok || tx_rdy) begin
          if (int'(k) == 5*NSUB-1) begin st <= S_WAIT; wt <= '0; end
          else k <= k + 1'b1;
        end
        S_WAIT: begin
          wt <= wt + 1'b1;
          if (all_got || int'(wt) == WAIT_MAX) begin st <= S_DECIDE; s <= '0; end
        end
        default: begin  // S_DECIDE
          if (s[SUB_W]) begin st <= S_IDLE; got <= '0; end
          else if (!dec_mv || mv_rdy) begin
            s <= s + 1'b1;
            if (dec_mv) n_rebal <= n_rebal + 1'b1;
          end
        end
      endcase
    end
  end
endmodule
