// Self-checking test of the sub-OWG arbiter: for random load vectors (many with ties and
// zeros) the selection must be the largest load, ties going to the lower index, and valid
// must be low only when every load is zero. The arbiter is combinational (zero latency).
module tb_subowg_arbiter;
  import octopus_pkg::*;
  localparam int SW = LOAD_W + 4;
  logic [NSUB-1:0][SW-1:0] load;
  logic [SUB_W-1:0] sel;
  logic valid;
  subowg_arbiter #(.SW(SW)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 5000; t++) begin
      int best, bi;
      for (int s = 0; s < NSUB; s++)
        load[s] = ($urandom_range(3) == 0) ? '0 : SW'($urandom_range(t % 2 ? 3 : 100000));
      #1;
      best = 0; bi = 0;
      for (int s = 0; s < NSUB; s++) if (int'(load[s]) > best) begin best = int'(load[s]); bi = s; end
      checks++;
      if (valid != (best > 0) || (best > 0 && int'(sel) != bi)) begin
        failures++;
        if (failures < 5) $display("FAIL: loads %p sel %0d valid %b, expected %0d", load, sel, valid, bi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
