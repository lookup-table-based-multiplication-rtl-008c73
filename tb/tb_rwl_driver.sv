// tb_rwl_driver: checks that the encoder's one-hot wordline is driven only when
// enabled, and that `active` reports a driven row.
module tb_rwl_driver;
  logic [15:0] rwl, rwl_drv; logic en, active;
  int checks = 0, failures = 0;
  rwl_driver dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 64; i++) begin
      rwl = (i % 17 == 16) ? 16'h0 : (16'h1 << (i % 16)); en = i[5] | i[0]; #1;
      checks++; if (rwl_drv != (en ? rwl : 16'h0)) begin failures++; $display("rwl=%h en=%b drv=%h", rwl, en, rwl_drv); end
      checks++; if (active != (en && rwl != 0)) begin failures++; $display("active wrong"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
