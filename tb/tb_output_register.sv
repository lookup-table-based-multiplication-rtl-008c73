// tb_output_register: checks that results are captured once per rising edge of
// ACK, held while ACK stays high or low, and that out_valid pulses once.
module tb_output_register;
  logic clk = 0, rst_n = 0, ack = 0, out_valid;
  logic [15:0] y [4], q [4], exp_q [4];
  int checks = 0, failures = 0, pulses = 0;
  output_register #(.N_DEC(4)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (out_valid) pulses++;
  initial begin
    repeat (5000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int j = 0; j < 4; j++) begin y[j] = 0; exp_q[j] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); for (int j = 0; j < 4; j++) begin y[j] = 16'($urandom); exp_q[j] = y[j]; end
      ack = 1;
      @(negedge clk); for (int j = 0; j < 4; j++) y[j] = 16'($urandom);   // change while ack high
      repeat (3) @(negedge clk);
      for (int j = 0; j < 4; j++) begin checks++; if (q[j] != exp_q[j]) begin failures++; $display("q[%0d]=%h exp %h", j, q[j], exp_q[j]); end end
      ack = 0;
      repeat (2) @(negedge clk);
      for (int j = 0; j < 4; j++) begin checks++; if (q[j] != exp_q[j]) failures++; end
    end
    checks++; if (pulses != 50) begin failures++; $display("out_valid pulses %0d", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
