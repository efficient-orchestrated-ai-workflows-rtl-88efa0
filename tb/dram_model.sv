// Behavioural model of one DRAM channel behind a TF port (not synthesizable design content:
// the DRAM is an external part). Every request is accepted (gnt high); a read returns its
// word in order LAT cycles later. Words are 32 bits; the array is visible to the testbench
// for preloading and checking.
module dram_model #(
  parameter int WORDS = 4096,
  parameter int LAT   = 3
) (
  input  logic        clk,
  input  logic        req,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic        gnt,
  output logic        rv,
  output logic [31:0] rdata
);
  logic [31:0] mem [WORDS];
  logic        pv [LAT];
  logic [31:0] pd [LAT];
  assign gnt   = 1'b1;
  assign rv    = pv[LAT-1];
  assign rdata = pd[LAT-1];
  initial for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end
  initial for (int i = 0; i < WORDS; i++) mem[i] = '0;
  always_ff @(posedge clk) begin
    if (req && we) mem[addr % WORDS] <= wdata;
    pv[0] <= req && !we;
    pd[0] <= mem[addr % WORDS];
    for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
  end
endmodule
