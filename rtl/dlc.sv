// dlc: dual-rail dynamic logic comparator with its own stored threshold.
//
// Compares an 8-bit unsigned operand x with the threshold t held in the
// comparator's own 8 storage bits. The outputs follow the truth table of the
// paper's comparator: while clk (here `eval`) is low both rails YP and YN are
// precharged high; in evaluation exactly one rail falls:
//     t >  x  ->  YP=0, YN=1
//     t == x  ->  YP=0, YN=1
//     t <  x  ->  YP=1, YN=0
// so `done = yp ^ yn` is the dual-rail completion signal.
//
// Timing model. In silicon the comparator is a chain of eight 1-bit stages
// starting at the MSB; a stage whose bits differ discharges a rail at once, a
// stage whose bits are equal hands the decision to the next lower stage. The
// latency therefore grows with the number of equal leading bits. This RTL is a
// clocked model of that chain: one clock cycle per 1-bit stage, so a result
// decided at the MSB appears 1 cycle after `eval` rises and a tie takes 8
// cycles. The one-stage-per-cycle rate is this design's own choice; the paper
// gives only that the MSB case is fastest and the all-equal case slowest.
//
// The threshold is written through `t_we`/`t_wdata` (the paper stores it in
// 8 SRAM bitcells next to the comparator but does not describe their write
// path). Reset clears the threshold and precharges both rails.
module dlc
  import maddness_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           t_we,     // write the stored threshold
  input  logic [X_W-1:0] t_wdata,
  input  logic           eval,     // 0: precharge, 1: evaluate
  input  logic [X_W-1:0] x,        // operand, stable while eval is high
  output logic           yp,       // falls when x <= t
  output logic           yn,       // falls when x >  t
  output logic           done,     // exactly one rail has fallen
  output logic [X_W-1:0] t_q       // stored threshold (read-back for test)
);

  logic [X_W-1:0] t;
  logic [$clog2(X_W)-1:0] bitpos;  // 1-bit stage the discharge front has reached
  logic yp_q, yn_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t <= '0;
    else if (t_we) t <= t_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      yp_q   <= 1'b1;
      yn_q   <= 1'b1;
      bitpos <= $clog2(X_W)'(X_W-1);
    end else if (!eval) begin
      // precharge phase
      yp_q   <= 1'b1;
      yn_q   <= 1'b1;
      bitpos <= $clog2(X_W)'(X_W-1);
    end else if (yp_q && yn_q) begin
      // evaluation: examine one 1-bit stage per cycle from the MSB down
      if (x[bitpos] != t[bitpos]) begin
        yp_q <= ~x[bitpos] ? 1'b0 : 1'b1;  // x bit 0, t bit 1 -> t > x
        yn_q <= ~x[bitpos] ? 1'b1 : 1'b0;
      end else if (bitpos == '0) begin
        yp_q <= 1'b0;                      // all bits equal: t == x
        yn_q <= 1'b1;
      end else begin
        bitpos <= bitpos - 1'b1;
      end
    end
  end

  assign yp   = yp_q;
  assign yn   = yn_q;
  assign done = yp_q ^ yn_q;
  assign t_q  = t;

  // Both rails may never be discharged at once.
  assert property (@(posedge clk) disable iff (!rst_n) (yp_q || yn_q));

endmodule
