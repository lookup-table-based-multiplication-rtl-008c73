// tb_pipeline_controller: runs the block controller between a randomly slow
// upstream block and downstream block (both four-phase models), a random-latency
// encoder model and a one-cycle decoder model, and checks every edge of the
// handshake: ACK_k rises only after RCD during evaluation, falls only after
// REQ_{k+1} fell; REQ_k rises only after ACK_{k-1} fell; evaluation starts only
// when all start conditions hold; the read wordlines are enabled only after the
// encoder is done. It also counts stalls (downstream or upstream not ready,
// input empty, CALCE low) and requires each to have happened.
module tb_pipeline_controller;
  logic clk = 0, rst_n = 0, calce = 0, x_valid = 0, ack_in = 0, req_in = 1, enc_done = 0, rcd = 0;
  logic req_out, ack_out, iclk, pche, rwl_en, x_pop, busy;
  int checks = 0, failures = 0, done_cnt = 0, pops = 0;
  int st_down = 0, st_up = 0, st_empty = 0, st_calce = 0;
  pipeline_controller dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // environment models, updated on the falling edge
  int enc_wait = 0;
  always @(negedge clk) if (rst_n) begin
    if (req_out && !ack_in && ($urandom % 4 == 0)) ack_in <= 1;
    else if (!req_out && ack_in && ($urandom % 3 == 0)) ack_in <= 0;
    if (ack_out && req_in && ($urandom % 6 == 0)) req_in <= 0;
    else if (!ack_out && !req_in && ($urandom % 3 == 0)) req_in <= 1;
    x_valid <= ($urandom % 5) != 0;
    if (($urandom % 50) == 0) calce <= ~calce; else if (!calce && ($urandom % 8 == 0)) calce <= 1;
    if (iclk) begin
      if (enc_wait == 0) enc_wait <= 4 + $urandom % 29;
      else if (enc_wait == 1) enc_done <= 1;
      else enc_wait <= enc_wait - 1;
    end else begin enc_done <= 0; enc_wait <= 0; end
  end
  always @(posedge clk) rcd <= rwl_en;   // decoder answers one cycle after the wordline

  // edge checks
  logic p_ack_out, p_req_out, p_iclk, p_ack_in, p_req_in, p_rcd, p_busy, p_calce, p_xv;
  always @(posedge clk) begin
    if (rst_n) begin
      if (ack_out && !p_ack_out) begin checks++; if (!(p_busy && p_rcd)) begin failures++; $display("ACK rose without RCD"); end done_cnt++; end
      if (!ack_out && p_ack_out) begin checks++; if (p_req_in) begin failures++; $display("ACK fell before REQ_in fell"); end end
      if (req_out && !p_req_out) begin checks++; if (p_ack_in) begin failures++; $display("REQ rose before ACK_in fell"); end end
      if (iclk && !p_iclk) begin checks++;
        if (!(p_calce && p_xv && p_ack_in && p_req_in && !p_ack_out && p_req_out)) begin failures++; $display("started without conditions"); end end
      if (!p_busy && !p_ack_out && p_req_out) begin
        if (!p_req_in) st_down++; else if (!p_ack_in) st_up++; else if (!p_xv) st_empty++; else if (!p_calce) st_calce++;
      end
    end
    p_ack_out <= ack_out; p_req_out <= req_out; p_iclk <= iclk; p_ack_in <= ack_in; p_req_in <= req_in;
    p_rcd <= rcd; p_busy <= busy; p_calce <= calce; p_xv <= x_valid;
  end
  always @(posedge clk) if (rst_n) begin
    if (x_pop) pops++;
    if (rwl_en && !enc_done) begin checks++; failures++; $display("wordline before encoder done"); end
    if (pche == iclk) begin checks++; failures++; $display("precharge during evaluation"); end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (20000) @(posedge clk);
    checks++; if (done_cnt < 100) begin failures++; $display("only %0d lookups", done_cnt); end
    checks++; if (pops != done_cnt) begin failures++; $display("pops %0d lookups %0d", pops, done_cnt); end
    checks++; if (st_down == 0 || st_up == 0 || st_empty == 0 || st_calce == 0) begin failures++; end
    $display("lookups=%0d stalls: downstream=%0d upstream=%0d empty=%0d calce=%0d", done_cnt, st_down, st_up, st_empty, st_calce);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
