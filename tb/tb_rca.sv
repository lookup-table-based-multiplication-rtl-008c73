// tb_rca: self-checking test of the 16-bit ripple-carry adder resolving a
// carry-save word: y must equal s + 2c modulo 2^16 for random and extreme words.
module tb_rca;
  import maddness_pkg::*;
  cs_t cs; logic [15:0] y;
  int checks = 0, failures = 0;
  rca dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 5000; i++) begin
      cs.s = 16'($urandom); cs.c = 15'($urandom);
      if (i == 0) begin cs.s = 16'hFFFF; cs.c = 15'h7FFF; end
      if (i == 1) begin cs.s = 16'hFFFF; cs.c = 15'h0001; end
      #1;
      checks++; if (y != 16'(cs.s + {cs.c, 1'b0})) begin failures++; $display("s=%h c=%h y=%h", cs.s, cs.c, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
