// wwl_decoder_driver: write wordline decoder and driver of a compute block.
//
// Decodes the 4-bit row address A[3:0] into the one-hot write wordline word
// WWL[15:0] shared by all decoders of the block, and drives it only while the
// block's local write control enables a table write. Purely combinational.
module wwl_decoder_driver
  import maddness_pkg::*;
(
  input  logic [ROW_AW-1:0]   addr,
  input  logic                en,
  output logic [LUT_ROWS-1:0] wwl
);

  always_comb begin
    wwl = '0;
    if (en) wwl[addr] = 1'b1;
  end

endmodule
