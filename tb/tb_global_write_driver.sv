// tb_global_write_driver: issues random table and threshold writes and checks
// that, one cycle later, the strobes, address, data and the one-hot block
// select match the request, and that the strobes fall when no write is issued.
module tb_global_write_driver;
  import maddness_pkg::*;
  localparam int ND = 4, NS = 8;
  logic clk = 0, rst_n = 0, wr_lut = 0, wr_thr = 0, lwe, twe;
  logic [2:0] wr_blk = 0; logic [3:0] wr_addr = 0, a;
  logic [7:0] wr_data [ND], d [ND];
  logic [NS-1:0] blk_sel;
  int checks = 0, failures = 0;
  global_write_driver #(.N_DEC(ND), .N_S(NS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int j = 0; j < ND; j++) wr_data[j] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      logic [7:0] exp_d [ND];
      int kind;
      @(negedge clk);
      kind = $urandom % 3;
      wr_lut = (kind == 0); wr_thr = (kind == 1);
      wr_blk = 3'($urandom); wr_addr = 4'($urandom);
      for (int j = 0; j < ND; j++) begin wr_data[j] = 8'($urandom); exp_d[j] = wr_data[j]; end
      @(posedge clk); #1;
      checks++; if (lwe != (kind == 0) || twe != (kind == 1)) begin failures++; $display("strobes wrong"); end
      if (kind != 2) begin
        checks++; if (a != wr_addr || blk_sel != (8'h1 << wr_blk)) begin failures++; $display("addr/select wrong"); end
        for (int j = 0; j < ND; j++) begin checks++; if (d[j] != exp_d[j]) begin failures++; $display("d[%0d] wrong", j); end end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
