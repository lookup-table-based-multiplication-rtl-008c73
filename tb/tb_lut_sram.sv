// tb_lut_sram: writes all 16 rows, then reads every row in random order and
// checks the precharged bitline pair (both high under PCHE), the one-cycle
// discharge (RBL = data, RBLB = ~data), and that a read does not alter data.
module tb_lut_sram;
  import maddness_pkg::*;
  logic clk = 0, rst_n = 0, pche = 1;
  logic [15:0] wwl = 0, rwl = 0;
  logic [7:0] wbl = 0, rbl, rblb;
  logic [7:0] model [16];
  int checks = 0, failures = 0;
  lut_sram dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr(int r, logic [7:0] v);
    @(negedge clk); wwl = 16'h1 << r; wbl = v; model[r] = v;
    @(negedge clk); wwl = 0;
  endtask
  task automatic rd(int r);
    @(negedge clk); pche = 0; rwl = 16'h1 << r;
    checks++; if (rbl != 8'hFF || rblb != 8'hFF) begin failures++; $display("not precharged"); end
    @(posedge clk); #1;
    checks++; if (rbl != model[r] || rblb != ~model[r]) begin failures++; $display("row %0d rbl=%h rblb=%h exp %h", r, rbl, rblb, model[r]); end
    @(negedge clk); rwl = 0; pche = 1;
    @(posedge clk); #1;
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 16; r++) wr(r, 8'($urandom));
    for (int i = 0; i < 200; i++) begin
      rd($urandom % 16);
      if (i % 10 == 0) wr($urandom % 16, 8'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
