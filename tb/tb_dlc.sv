// tb_dlc: self-checking test of the dynamic logic comparator.
// Writes random thresholds, evaluates random operands (plus ties and MSB
// differences) and checks the dual-rail result against the truth table and the
// latency against 1 + (number of equal leading bits) cycles; also checks that
// both rails are precharged high while eval is low.
module tb_dlc;
  import maddness_pkg::*;
  logic clk = 0, rst_n = 0, t_we = 0, eval = 0;
  logic [7:0] t_wdata = 0, x = 0, t_q;
  logic yp, yn, done;
  int checks = 0, failures = 0;

  dlc dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int exp_lat(logic [7:0] a, logic [7:0] b);
    for (int i = 7; i >= 0; i--) if (a[i] != b[i]) return 8 - i;
    return 8;
  endfunction

  task automatic one(input logic [7:0] tv, input logic [7:0] xv);
    int cyc;
    @(negedge clk); t_we = 1; t_wdata = tv;
    @(negedge clk); t_we = 0; x = xv;
    checks++; if (!(yp && yn && !done) || t_q != tv) begin failures++; $display("precharge/threshold wrong"); end
    eval = 1; cyc = 0;
    do begin @(posedge clk); #1; cyc++; end while (!done && cyc < 20);
    checks++;
    if (cyc != exp_lat(tv, xv)) begin failures++; $display("latency t=%h x=%h got %0d exp %0d", tv, xv, cyc, exp_lat(tv, xv)); end
    checks++;
    if ((xv > tv) ? !(yp && !yn) : !(!yp && yn)) begin failures++; $display("result t=%h x=%h yp=%b yn=%b", tv, xv, yp, yn); end
    // the result must hold while eval stays high
    @(posedge clk); #1; checks++;
    if (((xv > tv) ? !(yp && !yn) : !(!yp && yn))) begin failures++; $display("result not held"); end
    @(negedge clk); eval = 0;
    @(posedge clk); #1; checks++;
    if (!(yp && yn)) begin failures++; $display("not precharged"); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    one(8'h80, 8'h7F);   // decided at MSB (best case)
    one(8'hFF, 8'hFF);   // tie: worst case
    one(8'h10, 8'h11);
    one(8'h00, 8'h00);
    for (int i = 0; i < 200; i++) begin
      logic [7:0] tv, xv;
      tv = 8'($urandom); xv = (i % 4 == 0) ? tv : (i % 4 == 1) ? (tv ^ (8'h1 << ($urandom % 8))) : 8'($urandom);
      one(tv, xv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
