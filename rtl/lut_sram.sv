// lut_sram: 16-row x 8-column two-port lookup table (10T-SRAM array model).
//
// Holds the 16 precomputed INT8 dot products of one decoder, one row per
// prototype. The write port is a one-hot write wordline `wwl` with the data on
// `wbl`; the read port is a one-hot read wordline `rwl` with separate read
// bitlines, so reads never disturb the stored data. The read bitlines are
// modelled as in the paper's column: while `pche` is high both RBL and RBLB of
// every column are precharged high; when a row is selected the cell discharges
// exactly one of the pair (RBL falls for a stored 0, RBLB falls for a stored 1)
// and the pair holds until the next precharge. The read value is RBL. A full
// discharge is modelled as one clock cycle (this design's timing unit). The
// transistor-level cell, its sizing and the absence of sense amplifiers are
// circuit matters with no counterpart here. The array itself has no reset; it
// must be written before it is read.
module lut_sram
  import maddness_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [LUT_ROWS-1:0] wwl,
  input  logic [LUT_W-1:0]    wbl,
  input  logic                pche,
  input  logic [LUT_ROWS-1:0] rwl,
  output logic [LUT_W-1:0]    rbl,
  output logic [LUT_W-1:0]    rblb
);

  logic [LUT_W-1:0] mem [LUT_ROWS];
  logic [LUT_W-1:0] rd;

  always_ff @(posedge clk) begin
    for (int r = 0; r < LUT_ROWS; r++)
      if (wwl[r]) mem[r] <= wbl;
  end

  always_comb begin
    rd = '0;
    for (int r = 0; r < LUT_ROWS; r++)
      if (rwl[r]) rd = rd | mem[r];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbl  <= '1;
      rblb <= '1;
    end else if (pche) begin
      rbl  <= '1;
      rblb <= '1;
    end else if (|rwl && (&(rbl & rblb))) begin
      rbl  <= rd;
      rblb <= ~rd;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(wwl));
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(rwl));

endmodule
