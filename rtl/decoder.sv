// decoder: one lookup-and-accumulate unit of a compute block.
//
// Made of the 16x8 two-port table (lut_sram), a 16-bit carry-save adder (csa),
// the output latches that hold the adder result, and read-completion detection.
// Operation, following the paper's column timing: the block's controller drops
// `pche` and the read wordline driver raises one row of `rwl`; one bitline of
// each column discharges; the column's completion RCD_col = NAND(RBL, RBLB)
// rises; a pulse generator turns that edge into a one-cycle latch enable GE for
// the column, and the latch captures the full adder's sum and carry. The upper
// eight adder bits take the sign-extended entry and are latched with column 7's
// enable. `rcd_lut` is the AND of the eight RCD_col signals through the
// NAND-NOR tree.
//
// Timing: `rcd_lut` rises one cycle after `rwl` is raised, in the same cycle as
// the GE pulse, and the latched word `cs_out` is valid from the next cycle on.
// It is held until the next GE pulse, i.e. through precharge. The latches are
// modelled as edge-triggered registers enabled by GE (the paper's are D-latches
// opened by the GE pulse); they reset to zero.
module decoder
  import maddness_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [LUT_ROWS-1:0] wwl,
  input  logic [LUT_W-1:0]    wdata,
  input  logic                pche,
  input  logic [LUT_ROWS-1:0] rwl,
  input  cs_t                 cs_in,    // partial sum from the previous block
  output cs_t                 cs_out,   // latched partial sum to the next block
  output logic                rcd_lut
);

  logic [LUT_W-1:0] rbl, rblb, rcd_col, rcd_col_d, ge;
  cs_t              fa;

  lut_sram u_lut (
    .clk(clk), .rst_n(rst_n), .wwl(wwl), .wbl(wdata),
    .pche(pche), .rwl(rwl), .rbl(rbl), .rblb(rblb)
  );

  assign rcd_col = ~(rbl & rblb);

  // Pulse generator: one-cycle GE at the rising edge of each column's RCD_col.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rcd_col_d <= '0;
    else        rcd_col_d <= rcd_col;
  end
  assign ge = rcd_col & ~rcd_col_d;

  csa u_csa (.a(rbl), .cs_in(cs_in), .cs_out(fa));

  // Output latches, one per bit; bits LUT_W.. follow column LUT_W-1.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_out <= CS_ZERO;
    end else begin
      for (int i = 0; i < ACC_W; i++) begin
        if (ge[(i < LUT_W) ? i : LUT_W-1]) begin
          cs_out.s[i] <= fa.s[i];
          if (i < ACC_W-1) cs_out.c[i] <= fa.c[i];
        end
      end
    end
  end

  rcd_tree #(.N(LUT_W)) u_rcd (.done_in(rcd_col), .all_done(rcd_lut));

endmodule
