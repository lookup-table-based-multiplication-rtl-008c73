// csa: 16-bit carry-save adder of one decoder.
//
// Adds a signed INT8 lookup result to the carry-save partial sum coming from the
// previous compute block without propagating any carry: each bit position is an
// independent full adder with inputs (a[i], s_in[i], c_in[i-1]) and outputs
// sum s_out[i] and carry c_out[i] (weight 2^(i+1)). The carry into bit 0 is
// zero and the carry out of bit 15 is dropped, so the represented value
// s + 2*c is kept modulo 2^16. The 8-bit entry is sign-extended to 16 bits:
// bits 8..15 all see the entry's sign bit (the paper gives INT8 entries and a
// 16-bit CSA, but not how the widths are matched). Purely combinational.
module csa
  import maddness_pkg::*;
(
  input  logic [LUT_W-1:0] a,
  input  cs_t              cs_in,
  output cs_t              cs_out
);

  logic [ACC_W-1:0] ax, cx, carry;

  always_comb begin
    ax = {{(ACC_W-LUT_W){a[LUT_W-1]}}, a};
    cx = {cs_in.c, 1'b0};
    for (int i = 0; i < ACC_W; i++) begin
      cs_out.s[i] = ax[i] ^ cs_in.s[i] ^ cx[i];
      carry[i]    = (ax[i] & cs_in.s[i]) | (ax[i] & cx[i]) | (cs_in.s[i] & cx[i]);
    end
    cs_out.c = carry[ACC_W-2:0];
  end

endmodule
