// local_write_control: per-block write enable logic.
//
// Turns the globally broadcast write strobes into this block's own enables.
// A table write (LWE) or a threshold write (TWE) reaches the block only when
// the global write driver selects this block and the macro is not calculating
// (CALCE low), so SRAM contents never change under a lookup. The paper shows a
// local write control in each block next to the WWL decoder; its logic, the
// block select and the separate threshold strobe are this design's choice.
// Purely combinational.
module local_write_control (
  input  logic calce,
  input  logic blk_sel,
  input  logic lwe,
  input  logic twe,
  output logic lut_we,
  output logic thr_we
);

  assign lut_we = blk_sel && lwe && !calce;
  assign thr_we = blk_sel && twe && !calce;

endmodule
