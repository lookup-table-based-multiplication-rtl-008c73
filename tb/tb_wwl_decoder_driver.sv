// tb_wwl_decoder_driver: checks that every address gives the matching one-hot
// write wordline when enabled and no wordline when disabled.
module tb_wwl_decoder_driver;
  logic [3:0] addr; logic en; logic [15:0] wwl;
  int checks = 0, failures = 0;
  wwl_decoder_driver dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 64; i++) begin
      addr = 4'(i); en = i[4]; #1;
      checks++; if (wwl != (en ? (16'h1 << addr) : 16'h0)) begin failures++; $display("addr=%0d en=%b wwl=%h", addr, en, wwl); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
