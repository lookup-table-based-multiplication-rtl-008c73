// tb_delay_gate: drives a random bit stream and checks that the output equals
// the input DELAY cycles earlier, for DELAY = 2 (default) and 1.
module tb_delay_gate;
  logic clk = 0, rst_n = 0, d = 0, q2, q1;
  logic [7:0] hist = 0;
  int checks = 0, failures = 0;
  delay_gate                dut2 (.clk(clk), .rst_n(rst_n), .d(d), .q(q2));
  delay_gate #(.DELAY(1))   dut1 (.clk(clk), .rst_n(rst_n), .d(d), .q(q1));
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); #1;
    checks++; if (q1 || q2) begin failures++; $display("not reset"); end
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk); d = 1'($urandom);
      @(posedge clk); hist = {hist[6:0], d}; #1;
      if (i >= 2) begin
        checks++; if (q2 != hist[1]) begin failures++; $display("delay 2 wrong at %0d", i); end
        checks++; if (q1 != hist[0]) begin failures++; $display("delay 1 wrong at %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
