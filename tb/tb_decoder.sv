// tb_decoder: loads a random table, then performs lookups: for each, a random
// carry-save input is presented, a row is selected, and the test checks that
// RCD_LUT rises exactly one cycle after the wordline, that the latched output
// (valid one cycle after RCD_LUT) resolves to input + sign-extended entry, and that the latch holds the value
// through precharge while the input changes.
module tb_decoder;
  import maddness_pkg::*;
  logic clk = 0, rst_n = 0, pche = 1, rcd_lut;
  logic [15:0] wwl = 0, rwl = 0;
  logic [7:0] wdata = 0;
  cs_t cs_in, cs_out;
  logic [7:0] model [16];
  int checks = 0, failures = 0;
  decoder dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    cs_in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 16; r++) begin
      @(negedge clk); wwl = 16'h1 << r; wdata = 8'($urandom); model[r] = wdata;
    end
    @(negedge clk); wwl = 0;
    for (int i = 0; i < 300; i++) begin
      int r, cyc; logic [15:0] exp_v;
      r = $urandom % 16;
      cs_in.s = 16'($urandom); cs_in.c = 15'($urandom);
      exp_v = 16'(cs_value(cs_in) + {{8{model[r][7]}}, model[r]});
      @(negedge clk); pche = 0; rwl = 16'h1 << r; cyc = 0;
      checks++; if (rcd_lut) begin failures++; $display("rcd high before read"); end
      do begin @(posedge clk); #1; cyc++; end while (!rcd_lut && cyc < 10);
      checks++; if (cyc != 1) begin failures++; $display("rcd latency %0d", cyc); end
      @(negedge clk); rwl = 0; pche = 1;
      @(posedge clk); #1;   // the GE pulse latches at this edge
      checks++; if (cs_value(cs_out) != exp_v) begin failures++; $display("row %0d got %h exp %h", r, cs_value(cs_out), exp_v); end
      cs_in.s = 16'($urandom);
      repeat (2) @(posedge clk); #1;
      checks++; if (cs_value(cs_out) != exp_v || rcd_lut) begin failures++; $display("latch not held / rcd not cleared"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
