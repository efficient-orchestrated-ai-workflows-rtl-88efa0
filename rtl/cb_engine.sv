// Control Block Engine of a CBU. It executes up to NRULE control-block rules (cb_rule_t,
// written by the host bus) on the streams held in the CBU's TF Queue, one packet at a time,
// visiting the rules round robin:
//  ROUTE    packet from sq0 goes to dq1 if data >= param, else to dq0 (two-way route).
//  MERGE    whole streams from sq0 and sq1 are forwarded to dq0; a stream is never
//           interleaved with another one (the source is kept until its last packet).
//  EXPAND   each packet becomes n = data[31:28] sub-stream packets {j, data[27:0]},
//           j = 0..n-1; the last one carries the input's last flag.
//  COLLAPSE packets are summed until the last packet of the stream; one packet with the
//           sum and last=1 is emitted.
// Queue access uses one TF Queue client port (pop: grant, data next cycle; push: ready).
// Route/Merge and Expand/Collapse as the four processes are the paper's; the conditions
// (threshold compare, count in the top nibble, summation) are this design's choice.
// Lint notes: only the low bits of the rotating rule pointer are used.
module cb_engine import octopus_pkg::*; #(
  parameter int NRULE = 4,
  localparam int RIW  = (NRULE > 1) ? $clog2(NRULE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rule_we,
  input  logic [RIW-1:0]    rule_idx,
  input  cb_rule_t          rule_wd,
  input  logic [NQ-1:0]     q_empty,
  output logic              push_v,
  output logic [QID_W-1:0]  push_q,
  output tf_word_t          push_w,
  input  logic              push_rdy,
  output logic              pop_req,
  output logic [QID_W-1:0]  pop_q,
  input  logic              pop_gnt,
  input  logic              pop_rv,
  input  tf_word_t          pop_rd,
  output logic [15:0]       n_packets
);
  typedef enum logic [1:0] {S_PICK, S_POP, S_WAIT, S_EMIT} st_e;
  st_e st;
  cb_rule_t rules [NRULE];
  logic [NRULE-1:0] in_stream, cur_src, pref;
  logic [DATA_W-1:0] acc [NRULE];
  logic [RIW-1:0] rr, cr;
  logic [QID_W-1:0] src;
  logic src_sel;
  tf_word_t w;
  logic [3:0] j;
  logic emit, done, pk_found;
  logic [RIW-1:0] pk_r;
  logic pk_sel;

  // rule selection
  always_comb begin
    pk_found = 1'b0; pk_r = '0; pk_sel = 1'b0;
    for (int k = NRULE-1; k >= 0; k--) begin
      int r;
      logic s;
      logic ok;
      r = (int'(rr) + k) % NRULE;
      s = 1'b0;
      if (rules[r].op == CB_MERGE) begin
        if (in_stream[r]) s = cur_src[r];
        else if (pref[r]) s = q_empty[rules[r].sq1] ? 1'b0 : 1'b1;
        else              s = q_empty[rules[r].sq0] ? 1'b1 : 1'b0;
      end
      ok = rules[r].valid && !q_empty[s ? rules[r].sq1 : rules[r].sq0];
      if (ok) begin pk_found = 1'b1; pk_r = RIW'(r); pk_sel = s; end
    end
  end

  assign pop_req = (st == S_POP);
  assign pop_q   = src;

  // output of the current packet
  always_comb begin
    emit = 1'b0; push_q = rules[cr].dq0; push_w = w; done = 1'b0;
    if (st == S_EMIT) begin
      case (rules[cr].op)
        CB_ROUTE: begin
          emit = 1'b1;
          push_q = (w.data >= DATA_W'(rules[cr].param)) ? rules[cr].dq1 : rules[cr].dq0;
        end
        CB_MERGE: emit = 1'b1;
        CB_EXPAND: begin
          emit = (w.data[31:28] != 0);
          push_w.data = {j, w.data[27:0]};
          push_w.last = w.last && (j == w.data[31:28] - 4'd1);
          if (w.data[31:28] == 0) done = 1'b1;
        end
        default: begin  // CB_COLLAPSE
          emit = w.last;
          push_w.data = acc[cr] + w.data;
          push_w.last = 1'b1;
          if (!w.last) done = 1'b1;
        end
      endcase
      if (emit && push_rdy)
        done = (rules[cr].op != CB_EXPAND) || (j == w.data[31:28] - 4'd1);
    end
  end
  assign push_v = emit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_PICK; rr <= '0; cr <= '0; src <= '0; src_sel <= 1'b0; w <= '0; j <= '0;
      in_stream <= '0; cur_src <= '0; pref <= '0; n_packets <= '0;
      for (int r = 0; r < NRULE; r++) begin rules[r] <= '0; acc[r] <= '0; end
    end else begin
      if (rule_we) rules[rule_idx] <= rule_wd;
      case (st)
        S_PICK: if (pk_found) begin
          cr <= pk_r; src_sel <= pk_sel;
          src <= pk_sel ? rules[pk_r].sq1 : rules[pk_r].sq0;
          st <= S_POP;
        end
        S_POP:  if (pop_gnt) st <= S_WAIT;
        S_WAIT: if (pop_rv) begin w <= pop_rd; j <= '0; st <= S_EMIT; end
        default: begin  // S_EMIT
          if (emit && push_rdy) j <= j + 1'b1;
          if (done) begin
            st <= S_PICK;
            rr <= (int'(cr) == NRULE-1) ? '0 : cr + 1'b1;
            n_packets <= n_packets + 1'b1;
            if (rules[cr].op == CB_MERGE) begin
              in_stream[cr] <= !w.last;
              cur_src[cr]   <= src_sel;
              if (w.last) pref[cr] <= !src_sel;
            end
            if (rules[cr].op == CB_COLLAPSE) acc[cr] <= w.last ? '0 : acc[cr] + w.data;
          end
        end
      endcase
    end
  end
endmodule
