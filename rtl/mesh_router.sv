// Router of the Octopus data network and control network (both meshes have the same
// topology; only the flit width W differs). Five ports: 0 local, 1 N, 2 E, 3 S, 4 W.
// Each input has a two-entry FIFO whose not-full flag is the ready of that link, so no
// combinational path crosses routers. Routing is dimension-ordered (X first, then Y) on the
// destination coordinates held in the top 2*CO_W bits of the flit (dx above dy); y grows to
// the south. Each output serves the inputs that want it round robin, one flit per cycle.
// A flit takes one cycle per hop when the path is free.
// The two meshes and N/E/S/W router ports are the paper's; the routing algorithm, buffering
// and arbitration are this design's choice.
// Lint notes: rst_n also gates the assertions (reported as sync and async use; no effect on the circuit); the FIFO occupancy output of the input buffers is not needed here.
module mesh_router import octopus_pkg::*; #(
  parameter int W = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [CO_W-1:0]    my_x,
  input  logic [CO_W-1:0]    my_y,
  input  logic [4:0]         in_v,
  input  logic [4:0][W-1:0]  in_d,
  output logic [4:0]         in_rdy,
  output logic [4:0]         out_v,
  output logic [4:0][W-1:0]  out_d,
  input  logic [4:0]         out_rdy
);
  logic [4:0][W-1:0] hd;
  logic [4:0] emp, ful, pop;
  logic [4:0][2:0] route;
  logic [4:0][2:0] rr;
  logic [4:0][2:0] gsel;
  logic [4:0] gv;

  for (genvar i = 0; i < 5; i++) begin : g_in
    logic [1:0] cnt;
    sync_fifo #(.W(W), .DEPTH(2)) u_ib (
      .clk, .rst_n, .push(in_v[i] && !ful[i]), .wr_data(in_d[i]), .pop(pop[i]),
      .rd_data(hd[i]), .empty(emp[i]), .full(ful[i]), .count(cnt));
    assign in_rdy[i] = !ful[i];
    logic [CO_W-1:0] dx, dy;
    assign dx = hd[i][W-1 -: CO_W];
    assign dy = hd[i][W-1-CO_W -: CO_W];
    always_comb begin
      if      (dx > my_x) route[i] = 3'd2;
      else if (dx < my_x) route[i] = 3'd4;
      else if (dy > my_y) route[i] = 3'd3;
      else if (dy < my_y) route[i] = 3'd1;
      else                route[i] = 3'd0;
    end
  end

  always_comb begin
    gv = '0; gsel = '0;
    for (int o = 0; o < 5; o++) begin
      for (int k = 4; k >= 0; k--) begin
        int i;
        i = (int'(rr[o]) + k) % 5;
        if (!emp[i] && int'(route[i]) == o) begin gv[o] = 1'b1; gsel[o] = 3'(i); end
      end
      out_v[o] = gv[o];
      out_d[o] = hd[gsel[o]];
    end
  end
  always_comb begin
    pop = '0;
    for (int o = 0; o < 5; o++) if (gv[o] && out_rdy[o]) pop[gsel[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else for (int o = 0; o < 5; o++)
      if (gv[o] && out_rdy[o]) rr[o] <= (gsel[o] == 3'd4) ? 3'd0 : gsel[o] + 3'd1;
  end
endmodule
