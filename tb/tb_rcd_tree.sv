// tb_rcd_tree: self-checking test of the NAND-NOR completion tree for N = 8
// (column tree, odd level count) and N = 16 (block tree) with random and
// corner-case inputs against the AND of the inputs.
module tb_rcd_tree;
  logic [7:0]  in8;  logic out8;
  logic [15:0] in16; logic out16;
  logic [2:0]  in3;  logic out3;
  int checks = 0, failures = 0;
  rcd_tree #(.N(8))  u8  (.done_in(in8),  .all_done(out8));
  rcd_tree #(.N(16)) u16 (.done_in(in16), .all_done(out16));
  rcd_tree #(.N(3))  u3  (.done_in(in3),  .all_done(out3));
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 2000; i++) begin
      in8  = (i % 3 == 0) ? 8'hFF  : 8'($urandom) | ((i % 5 == 0) ? ~(8'h1 << (i % 8)) : 8'h0);
      in16 = (i % 3 == 0) ? 16'hFFFF : 16'($urandom) | ((i % 5 == 0) ? ~(16'h1 << (i % 16)) : 16'h0);
      in3  = 3'(i);
      #1;
      checks++; if (out8  != &in8)  begin failures++; $display("N=8 in=%h out=%b", in8, out8); end
      checks++; if (out16 != &in16) begin failures++; $display("N=16 in=%h out=%b", in16, out16); end
      checks++; if (out3  != &in3)  begin failures++; $display("N=3 in=%b out=%b", in3, out3); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
