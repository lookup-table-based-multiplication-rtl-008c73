// maddness_macro: multiplication-free lookup-table DNN accelerator macro (top).
//
// N_S compute blocks are chained; block k handles input channel k and the
// N_DEC decoder positions of every block handle N_DEC output kernels. For one
// output pixel, block k classifies its channel's subvector into a prototype
// and adds the precomputed dot products of that prototype with the N_DEC
// kernels to the carry-save partial sums arriving from block k-1. After block
// N_S, N_DEC 16-bit ripple-carry adders resolve the sums and the output
// register stores them: y[j] = sum over k of LUT_k,j[prototype_k].
//
// The blocks form a self-synchronous pipeline: neighbouring blocks exchange a
// four-phase handshake (ACK_k forward, REQ_k backward, see
// pipeline_controller), so block k can work on pixel p+1 while block k+1 works
// on pixel p. Block 1 sees a constant zero partial sum whose ACK_0 is simply its
// own REQ_1. At the end, ACK_Ns is captured by the output register and, through
// a delay gate and an inverter, returned as REQ_O.
//
// Interfaces: `calce` high enables calculation, low allows writes. A write
// (wr_lut or wr_thr) takes one cycle through the global write driver (see
// there). Each block k has its own operand input x_in[k] (the four subvector
// elements its tree compares, one per level) with valid/ready; the host feeds
// block k the operand sets of successive pixels in order. `y_valid` pulses for
// one cycle when `y` holds a new result. Everything is clocked by `clk`, which
// stands in for the gate delays of the clockless silicon; reset is
// asynchronous, active low.
module maddness_macro
  import maddness_pkg::*;
#(
  parameter int unsigned N_DEC      = N_DEC_DEFAULT,
  parameter int unsigned N_S        = N_S_DEFAULT,
  parameter int unsigned IBUF_DEPTH = 2,
  parameter int unsigned SINK_DELAY = 2,
  localparam int unsigned BW        = (N_S <= 1) ? 1 : $clog2(N_S)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              calce,
  // SRAM / threshold write port
  input  logic              wr_lut,
  input  logic              wr_thr,
  input  logic [BW-1:0]     wr_blk,
  input  logic [ROW_AW-1:0] wr_addr,
  input  logic [LUT_W-1:0]  wr_data [N_DEC],
  // operand inputs, one stream per block
  input  logic [N_S-1:0]    x_valid,
  output logic [N_S-1:0]    x_ready,
  input  logic [X_W-1:0]    x_in [N_S][TREE_LVL],
  // results
  output logic [ACC_W-1:0]  y [N_DEC],
  output logic              y_valid
);

  logic              lwe, twe;
  logic [ROW_AW-1:0] a;
  logic [LUT_W-1:0]  d [N_DEC];
  logic [N_S-1:0]    blk_sel;

  // ack[k] is ACK_k (ack[0] belongs to the zero source); req[k] is REQ_k
  // (req[N_S+1] is REQ_O).
  logic [N_S:0]      ack;
  logic [N_S+1:1]    req;
  cs_t               cs [N_S+1][N_DEC];
  logic [N_S-1:0]    busy;
  logic [ROW_AW-1:0] proto [N_S];
  logic [ACC_W-1:0]  sum [N_DEC];
  logic              ack_dly;

  global_write_driver #(.N_DEC(N_DEC), .N_S(N_S)) u_gwd (
    .clk(clk), .rst_n(rst_n),
    .wr_lut(wr_lut), .wr_thr(wr_thr), .wr_blk(wr_blk), .wr_addr(wr_addr),
    .wr_data(wr_data),
    .lwe(lwe), .twe(twe), .a(a), .d(d), .blk_sel(blk_sel)
  );

  assign ack[0] = req[1];
  for (genvar j = 0; j < N_DEC; j++) begin : g_zero
    assign cs[0][j] = CS_ZERO;
  end

  for (genvar k = 0; k < N_S; k++) begin : g_blk
    compute_block #(.N_DEC(N_DEC), .IBUF_DEPTH(IBUF_DEPTH)) u_cb (
      .clk(clk), .rst_n(rst_n), .calce(calce),
      .blk_sel(blk_sel[k]), .lwe(lwe), .twe(twe), .a(a), .d(d),
      .in_valid(x_valid[k]), .in_ready(x_ready[k]), .in_x(x_in[k]),
      .ack_in(ack[k]), .req_out(req[k+1]), .cs_in(cs[k]),
      .ack_out(ack[k+1]), .req_in(req[k+2]), .cs_out(cs[k+1]),
      .busy(busy[k]), .proto(proto[k])
    );
  end

  for (genvar j = 0; j < N_DEC; j++) begin : g_rca
    rca u_rca (.cs(cs[N_S][j]), .y(sum[j]));
  end

  output_register #(.N_DEC(N_DEC)) u_oreg (
    .clk(clk), .rst_n(rst_n), .ack(ack[N_S]), .y(sum), .q(y), .out_valid(y_valid)
  );

  delay_gate #(.DELAY(SINK_DELAY)) u_dly (
    .clk(clk), .rst_n(rst_n), .d(ack[N_S]), .q(ack_dly)
  );
  assign req[N_S+1] = ~ack_dly;

endmodule
