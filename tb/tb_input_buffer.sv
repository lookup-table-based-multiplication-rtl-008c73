// tb_input_buffer: pushes random operand sets with random valid and pop timing
// and checks FIFO order against a queue model, the ready/valid flags against
// the occupancy, and that the head stays stable until popped.
module tb_input_buffer;
  import maddness_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, x_valid, pop = 0;
  logic [7:0] in_x [4], x [4];
  logic [31:0] q [$];
  int checks = 0, failures = 0, pushed = 0, popped = 0;
  input_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [31:0] pack(logic [7:0] v [4]);
    return {v[3], v[2], v[1], v[0]};
  endfunction
  initial begin
    for (int i = 0; i < 4; i++) in_x[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      checks++; if (x_valid != (q.size() != 0) || in_ready != (q.size() < 2)) begin failures++; $display("flags wrong size=%0d", q.size()); end
      if (q.size() != 0) begin checks++; if (pack(x) != q[0]) begin failures++; $display("head %h exp %h", pack(x), q[0]); end end
      in_valid = ($urandom % 3) != 0;
      for (int i = 0; i < 4; i++) in_x[i] = 8'($urandom);
      pop = x_valid && (($urandom % 2) == 0);
      @(posedge clk);
      if (pop) begin void'(q.pop_front()); popped++; end
      if (in_valid && in_ready) begin q.push_back(pack(in_x)); pushed++; end
    end
    checks++; if (pushed < 100 || popped < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
