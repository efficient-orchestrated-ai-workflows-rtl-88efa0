// Small register FIFO with show-ahead output: rd_data is the head word whenever empty is low.
// push when not full, pop when not empty; both may happen in the same cycle. Count is exact.
// Lint notes: rst_n is both the asynchronous reset and the enable of the assertion check, which lint reports as a net used synchronously and asynchronously; it has no effect on the circuit.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 4,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wr_data,
  input  logic         pop,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full,
  output logic [AW:0]  count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  assign empty   = (count == 0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign rd_data = mem[rp];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push && !full) begin
        mem[wp] <= wr_data;
        wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop && !empty) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end
  // synthesis-neutral protocol checks
  always_ff @(posedge clk) if (rst_n) begin
    assert (!(push && full))  else $error("sync_fifo: push while full");
    assert (!(pop && empty))  else $error("sync_fifo: pop while empty");
  end
endmodule
