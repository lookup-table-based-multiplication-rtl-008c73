// global_write_driver: loads the macro's SRAM contents.
//
// Registers one write request from the host and broadcasts it to all compute
// blocks: the N_dec data bytes D_1..D_Ndec (one per decoder, so a whole table
// row across the block's decoders is written at once), the row address A[3:0],
// the table write strobe LWE and a one-hot block select. A threshold write
// (TWE) uses the same path: A selects the comparator 0..14 and D_1 carries the
// threshold. The paper shows a global write driver feeding D_1..D_K to the
// blocks, with LWE and A[3:0] along the top; the register stage, the block
// select and the threshold write path are this design's choice. A request
// appears on the outputs one cycle after it is presented; reset clears the
// strobes.
module global_write_driver
  import maddness_pkg::*;
#(
  parameter int unsigned N_DEC = N_DEC_DEFAULT,
  parameter int unsigned N_S   = N_S_DEFAULT,
  localparam int unsigned BW   = (N_S <= 1) ? 1 : $clog2(N_S)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_lut,      // write one table row
  input  logic              wr_thr,      // write one comparator threshold
  input  logic [BW-1:0]     wr_blk,      // target compute block
  input  logic [ROW_AW-1:0] wr_addr,     // row, or comparator index
  input  logic [LUT_W-1:0]  wr_data [N_DEC],
  output logic              lwe,
  output logic              twe,
  output logic [ROW_AW-1:0] a,
  output logic [LUT_W-1:0]  d [N_DEC],
  output logic [N_S-1:0]    blk_sel
);

  logic [BW-1:0] blk_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lwe   <= 1'b0;
      twe   <= 1'b0;
      a     <= '0;
      blk_q <= '0;
      for (int j = 0; j < N_DEC; j++) d[j] <= '0;
    end else begin
      lwe <= wr_lut;
      twe <= wr_thr;
      if (wr_lut || wr_thr) begin
        a     <= wr_addr;
        blk_q <= wr_blk;
        d     <= wr_data;
      end
    end
  end

  always_comb begin
    blk_sel = '0;
    blk_sel[blk_q] = 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(wr_lut && wr_thr));

endmodule
