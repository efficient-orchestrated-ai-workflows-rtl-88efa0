// Task Flow Port: the memory port between one DRAM channel and the edge of the data network.
// A load command reads len consecutive DRAM words from addr and sends them as one stream
// (tag from the command, last on the final word) to queue q of CBU (dx,dy). Packets that the
// network delivers to the port are written to DRAM at consecutive addresses starting from
// the address set by a store_base command (data only). DRAM interface: mem_req with mem_we,
// mem_addr, mem_wdata is accepted when mem_gnt is high; read data returns in order on
// mem_rv/mem_rdata, any number of cycles later. Writes have priority over reads; at most
// four reads are outstanding. done pulses when a load has sent its last packet.
// The TF port's role of moving task flows to and from DRAM is the paper's; its command set
// and DRAM interface are this design's choice.
// Lint notes: tag and last bits of arriving packets are not stored (data only) and the store_base bit of the held command is not read again.
module tf_port import octopus_pkg::*; (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_v,
  input  tfp_cmd_t          cmd,
  output logic              cmd_rdy,
  output logic              done,
  // network edge
  output logic              o_v,
  output dflit_t            o_d,
  input  logic              o_rdy,
  input  logic              i_v,
  input  dflit_t            i_d,
  output logic              i_rdy,
  // DRAM channel
  output logic              mem_req,
  output logic              mem_we,
  output logic [31:0]       mem_addr,
  output logic [DATA_W-1:0] mem_wdata,
  input  logic              mem_gnt,
  input  logic              mem_rv,
  input  logic [DATA_W-1:0] mem_rdata,
  output logic [31:0]       n_stored
);
  logic busy;
  tfp_cmd_t c;
  logic [15:0] issued, sent;
  logic [31:0] sptr;
  logic [2:0] outst;
  logic f_empty, f_full, f_pop, rd;
  logic [DATA_W-1:0] f_head;
  logic [2:0] f_cnt;

  assign cmd_rdy  = !busy;
  assign rd       = busy && issued != c.len && (32'(outst) + 32'(f_cnt)) < 4;
  assign mem_req  = i_v || rd;
  assign mem_we   = i_v;
  assign mem_addr = i_v ? sptr : c.addr + 32'(issued);
  assign mem_wdata = i_d.w.data;
  assign i_rdy    = i_v && mem_gnt;

  sync_fifo #(.W(DATA_W), .DEPTH(4)) u_rf (
    .clk, .rst_n, .push(mem_rv), .wr_data(mem_rdata), .pop(f_pop), .rd_data(f_head),
    .empty(f_empty), .full(f_full), .count(f_cnt));

  assign o_v   = !f_empty;
  assign o_d   = '{dx: c.dx, dy: c.dy, q: c.q,
                   w: '{last: (sent == c.len - 16'd1), tag: c.tag, data: f_head}};
  assign f_pop = o_v && o_rdy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; c <= '0; issued <= '0; sent <= '0; sptr <= '0; outst <= '0; done <= 1'b0;
      n_stored <= '0;
    end else begin
      done <= 1'b0;
      outst <= outst + 3'(mem_req && !mem_we && mem_gnt) - 3'(mem_rv);
      if (i_v && mem_gnt) begin sptr <= sptr + 1; n_stored <= n_stored + 1; end
      if (!busy) begin
        if (cmd_v) begin
          if (cmd.store_base) sptr <= cmd.addr;
          else if (cmd.len != 0) begin c <= cmd; busy <= 1'b1; issued <= '0; sent <= '0; end
        end
      end else begin
        if (mem_req && !mem_we && mem_gnt) issued <= issued + 1'b1;
        if (f_pop) begin
          sent <= sent + 1'b1;
          if (sent == c.len - 16'd1) begin busy <= 1'b0; done <= 1'b1; end
        end
      end
    end
  end
  always_ff @(posedge clk) if (rst_n) assert (!(mem_rv && f_full)) else $error("tf_port: read overflow");
endmodule
