// tb_bdt_encoder: self-checking test of the 4-level decision tree encoder.
// Loads 15 random thresholds, applies random operand sets (with forced ties)
// and checks the one-hot wordline against a reference walk of the tree
// (child 2n+1 when x <= t, 2n+2 when x > t; leaf n gives row 2(n-7)+b), the
// latency against the sum of the four comparator latencies, that exactly four
// comparators left precharge, and the threshold read-back.
module tb_bdt_encoder;
  import maddness_pkg::*;
  logic clk = 0, rst_n = 0, t_we = 0, eval = 0;
  logic [3:0] t_addr = 0;
  logic [7:0] t_wdata = 0;
  logic [7:0] x [4];
  logic [15:0] rwl;
  logic done;
  logic [14:0] fired, fired_acc;
  logic [7:0] t_q [15];
  logic [7:0] thr [15];
  int checks = 0, failures = 0;

  bdt_encoder dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lat(logic [7:0] a, logic [7:0] b);
    for (int i = 7; i >= 0; i--) if (a[i] != b[i]) return 8 - i;
    return 8;
  endfunction

  always @(posedge clk) fired_acc <= eval ? (fired_acc | fired) : '0;

  initial begin
    for (int i = 0; i < 4; i++) x[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 15; n++) begin
      @(negedge clk); t_we = 1; t_addr = 4'(n); thr[n] = 8'($urandom); t_wdata = thr[n];
    end
    @(negedge clk); t_we = 0;
    for (int n = 0; n < 15; n++) begin checks++; if (t_q[n] != thr[n]) failures++; end
    for (int it = 0; it < 300; it++) begin
      int node, row, explat, cyc, nf;
      node = 0; explat = 0;
      for (int l = 0; l < 4; l++) begin
        x[l] = (it % 3 == 0) ? thr[node] : 8'($urandom);
        explat += lat(thr[node], x[l]);
        node = (x[l] > thr[node]) ? 2*node + 2 : 2*node + 1;
      end
      row = 2*(((node - 1) / 2) - 7) + ((node % 2 == 0) ? 1 : 0);
      @(negedge clk); eval = 1; cyc = 0;
      do begin @(posedge clk); #1; cyc++; end while (!done && cyc < 40);
      checks++; if (rwl != (16'h1 << row)) begin failures++; $display("rwl %h exp row %0d", rwl, row); end
      checks++; if (cyc != explat) begin failures++; $display("latency %0d exp %0d", cyc, explat); end
      @(posedge clk); #1;
      nf = $countones(fired_acc);
      checks++; if (nf != 4) begin failures++; $display("fired %0d comparators", nf); end
      @(negedge clk); eval = 0;
      @(posedge clk); #1; checks++; if (rwl != 0 || done) begin failures++; $display("rwl not cleared"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
