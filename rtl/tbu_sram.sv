// TBU SRAM used as the TBU's input staging buffer: packets fetched from a CBU queue are
// written here before the compute fabric consumes them. It is a circular FIFO over a
// dual-port SRAM array (DEPTH words of tf_word_t; 1M words of 32-bit data = 4 MB).
// push/wr_word store a word when not full. pop_req (only when not empty) reads the head;
// pop_rv/pop_word deliver it one cycle later. count excludes words already popped.
// The paper only names this SRAM and gives its size; its use as a staging FIFO is this
// design's choice.
// Lint notes: rst_n also gates the overflow assertion (reported as a net used synchronously and asynchronously; no effect on the circuit).
module tbu_sram import octopus_pkg::*; #(
  parameter int DEPTH = 1048576,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     push,
  input  tf_word_t wr_word,
  output logic     full,
  input  logic     pop_req,
  output logic     pop_rv,
  output tf_word_t pop_word,
  output logic     empty,
  output logic [AW:0] count
);
  logic [AW-1:0] wp, rp;
  logic do_push, do_pop;
  assign empty   = (count == 0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop_req && !empty;

  sram_2p #(.W($bits(tf_word_t)), .DEPTH(DEPTH)) u_mem (
    .clk, .we(do_push), .waddr(wp), .wdata(wr_word),
    .re(do_pop), .raddr(rp), .rdata(pop_word));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0; pop_rv <= 1'b0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
      count  <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
      pop_rv <= do_pop;
    end
  end
  always_ff @(posedge clk) if (rst_n) assert (!(pop_req && empty)) else $error("tbu_sram: pop when empty");
endmodule
