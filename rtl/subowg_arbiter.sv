// Sub-OWG Arbiter of the Proactive Cluster Scheduler: selects the sub-OWG with the largest
// accumulated load (the longest queue) in the cluster. Ties go to the lower index; valid is
// low when every load is zero. Purely combinational.
// Selecting the longest queue is the paper's rule; the tie-break is this design's choice.
module subowg_arbiter import octopus_pkg::*; #(
  parameter int SW = LOAD_W + 4
) (
  input  logic [NSUB-1:0][SW-1:0] load,
  output logic [SUB_W-1:0]        sel,
  output logic                    valid
);
  always_comb begin
    logic [SW-1:0] m;
    m = '0; sel = '0; valid = 1'b0;
    for (int s = 0; s < NSUB; s++)
      if (load[s] > m) begin m = load[s]; sel = SUB_W'(s); valid = 1'b1; end
  end
endmodule
