// compute_block: one pipeline stage of the macro (one input channel).
//
// Contains the input buffer, the 4-level decision tree encoder, the block's
// self-synchronous controller, the read wordline driver, N_DEC decoders (each a
// 16x8 lookup table with a carry-save adder and output latches), the read
// completion tree that merges the decoders' RCD_LUT signals into the block's
// RCD, the local write control and the write wordline decoder/driver.
//
// One lookup: the controller raises `iclk`; the encoder classifies the head
// operand set of the input buffer into a prototype index (4 to 32 cycles,
// depending on how many leading bits of each operand equal its threshold); the
// wordline driver raises that row in all N_DEC tables; each decoder adds its
// entry to the partial sum of the same decoder position in the previous block
// and latches the result; when every decoder has latched, RCD rises and the
// controller completes the handshakes (see pipeline_controller). The same
// prototype index serves all N_DEC decoders, i.e. all output kernels.
//
// Writes (CALCE low): when this block is selected, LWE writes row A of all
// N_DEC tables with D_1..D_Ndec, and TWE writes D_1 as threshold of comparator A.
// The block structure is the paper's; see the sub-modules for what is assumed.
module compute_block
  import maddness_pkg::*;
#(
  parameter int unsigned N_DEC      = N_DEC_DEFAULT,
  parameter int unsigned IBUF_DEPTH = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              calce,
  // write bus
  input  logic              blk_sel,
  input  logic              lwe,
  input  logic              twe,
  input  logic [ROW_AW-1:0] a,
  input  logic [LUT_W-1:0]  d [N_DEC],
  // operand input
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [X_W-1:0]    in_x [TREE_LVL],
  // handshake and partial sums, previous block
  input  logic              ack_in,
  output logic              req_out,
  input  cs_t               cs_in [N_DEC],
  // handshake and partial sums, next block
  output logic              ack_out,
  input  logic              req_in,
  output cs_t               cs_out [N_DEC],
  // observation
  output logic              busy,
  output logic [ROW_AW-1:0] proto     // prototype index of the last lookup
);

  logic                lut_we, thr_we;
  logic [LUT_ROWS-1:0] wwl, rwl, rwl_drv;
  logic                x_valid, x_pop;
  logic [X_W-1:0]      x [TREE_LVL];
  logic [X_W-1:0]      t_q [N_DLC];
  logic [N_DLC-1:0]    fired;
  logic                enc_done, iclk, pche, rwl_en, rwl_act, rcd;
  logic [N_DEC-1:0]    rcd_lut;

  local_write_control u_lwc (
    .calce(calce), .blk_sel(blk_sel), .lwe(lwe), .twe(twe),
    .lut_we(lut_we), .thr_we(thr_we)
  );

  wwl_decoder_driver u_wwl (.addr(a), .en(lut_we), .wwl(wwl));

  input_buffer #(.DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .in_x(in_x),
    .x_valid(x_valid), .x(x), .pop(x_pop)
  );

  bdt_encoder u_enc (
    .clk(clk), .rst_n(rst_n),
    .t_we(thr_we), .t_addr(a), .t_wdata(d[0]),
    .eval(iclk), .x(x),
    .rwl(rwl), .done(enc_done), .fired(fired), .t_q(t_q)
  );

  pipeline_controller u_ctrl (
    .clk(clk), .rst_n(rst_n), .calce(calce), .x_valid(x_valid),
    .ack_in(ack_in), .req_out(req_out), .ack_out(ack_out), .req_in(req_in),
    .enc_done(enc_done), .rcd(rcd),
    .iclk(iclk), .pche(pche), .rwl_en(rwl_en), .x_pop(x_pop), .busy(busy)
  );

  rwl_driver u_rwl (.rwl(rwl), .en(rwl_en), .rwl_drv(rwl_drv), .active(rwl_act));

  for (genvar j = 0; j < N_DEC; j++) begin : g_dec
    decoder u_dec (
      .clk(clk), .rst_n(rst_n),
      .wwl(wwl), .wdata(d[j]),
      .pche(pche), .rwl(rwl_drv),
      .cs_in(cs_in[j]), .cs_out(cs_out[j]),
      .rcd_lut(rcd_lut[j])
    );
  end

  rcd_tree #(.N(N_DEC)) u_rcd (.done_in(rcd_lut), .all_done(rcd));

  // Index of the row read by the last lookup, kept for observation.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) proto <= '0;
    else if (rwl_act) begin
      for (int r = 0; r < LUT_ROWS; r++)
        if (rwl_drv[r]) proto <= ROW_AW'(r);
    end
  end

endmodule
