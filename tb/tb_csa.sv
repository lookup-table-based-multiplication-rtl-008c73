// tb_csa: self-checking test of the 16-bit carry-save adder: for random signed
// entries and random carry-save inputs, the resolved output s + 2c must equal
// the resolved input plus the sign-extended entry, modulo 2^16.
module tb_csa;
  import maddness_pkg::*;
  logic [7:0] a; cs_t cs_in, cs_out;
  int checks = 0, failures = 0;
  csa dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 5000; i++) begin
      logic [15:0] exp_v;
      a = 8'($urandom); cs_in.s = 16'($urandom); cs_in.c = 15'($urandom);
      if (i < 4) begin a = (i[0]) ? 8'h80 : 8'h7F; cs_in = '0; end
      #1;
      exp_v = 16'(cs_in.s + {cs_in.c, 1'b0} + {{8{a[7]}}, a});
      checks++; if (16'(cs_out.s + {cs_out.c, 1'b0}) != exp_v) begin failures++; $display("a=%h got %h exp %h", a, 16'(cs_out.s + {cs_out.c,1'b0}), exp_v); end
      // carry-save property: bitwise full adder, no carry propagation
      checks++; if (cs_out.s != (cs_in.s ^ {{8{a[7]}}, a} ^ {cs_in.c, 1'b0})) begin failures++; $display("sum word wrong"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
