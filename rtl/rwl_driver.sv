// rwl_driver: read wordline driver of a compute block.
//
// Takes the encoder's one-hot wordline word RWL and drives the shared read
// wordlines RWL' that run through all decoders of the block. The wordlines are
// driven only while the block controller enables the read (`en`, high once the
// encoder has finished and until the block returns to precharge), so a
// half-evaluated tree can never select a row. `active` reports that a row is
// being driven. Purely combinational; the gating by an enable is this design's
// choice, the paper names the driver without describing it.
module rwl_driver
  import maddness_pkg::*;
(
  input  logic [LUT_ROWS-1:0] rwl,
  input  logic                en,
  output logic [LUT_ROWS-1:0] rwl_drv,
  output logic                active
);

  assign rwl_drv = en ? rwl : '0;
  assign active  = |rwl_drv;

endmodule
