// rca: 16-bit ripple-carry adder that resolves a carry-save partial sum.
//
// Computes y = s + 2*c modulo 2^16 from the last compute block's sum word s and
// carry word c, as a chain of full adders whose carry ripples from bit 0 to
// bit 15 (the carry out of bit 15 is dropped). One RCA sits at the output of each decoder column of the macro.
// Purely combinational.
module rca
  import maddness_pkg::*;
(
  input  cs_t              cs,
  output logic [ACC_W-1:0] y
);

  logic [ACC_W-1:0] b;
  logic [ACC_W:0]   c;

  assign b    = {cs.c, 1'b0};
  assign c[0] = 1'b0;

  for (genvar i = 0; i < ACC_W; i++) begin : g_fa
    assign y[i]   = cs.s[i] ^ b[i] ^ c[i];
    assign c[i+1] = (cs.s[i] & b[i]) | (cs.s[i] & c[i]) | (b[i] & c[i]);
  end

endmodule
