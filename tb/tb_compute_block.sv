// tb_compute_block: one compute block (N_DEC = 4) between a four-phase upstream
// model that supplies random carry-save partial sums and a randomly slow
// downstream model. Tables and thresholds are loaded through the write port;
// then random operand sets (some equal to the thresholds on their path, to force
// ties and worst-case latency) are classified. For every lookup the test checks
// the prototype index against a reference tree walk, every decoder's latched
// sum against upstream sum + sign-extended table entry, and the latency from
// iCLK rising to ACK rising against (sum of comparator latencies) + 2 cycles.
// A write attempted while CALCE is high must be ignored.
module tb_compute_block;
  import maddness_pkg::*;
  localparam int ND = 4;
  logic clk = 0, rst_n = 0, calce = 0, blk_sel = 0, lwe = 0, twe = 0;
  logic [3:0] a = 0; logic [7:0] d [ND];
  logic in_valid = 0, in_ready; logic [7:0] in_x [4];
  logic ack_in = 0, req_out, ack_out, req_in = 1, busy;
  cs_t cs_in [ND], cs_out [ND];
  logic [3:0] proto;
  logic [7:0] tab [ND][16]; logic [7:0] thr [15];
  int checks = 0, failures = 0, lookups = 0;

  compute_block #(.N_DEC(ND)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int lat(logic [7:0] p, logic [7:0] q);
    for (int i = 7; i >= 0; i--) if (p[i] != q[i]) return 8 - i;
    return 8;
  endfunction

  // upstream: new random partial sum each transfer
  always @(negedge clk) if (rst_n) begin
    if (req_out && !ack_in && ($urandom % 3 == 0)) begin
      for (int j = 0; j < ND; j++) begin cs_in[j].s = 16'($urandom); cs_in[j].c = 15'($urandom); end
      ack_in <= 1;
    end else if (!req_out && ack_in && ($urandom % 2 == 0)) ack_in <= 0;
    if (ack_out && req_in && ($urandom % 5 == 0)) req_in <= 0;
    else if (!ack_out && !req_in) req_in <= 1;
  end

  // expected results, queued when the lookup starts
  int exp_row [$]; int exp_lat [$]; logic [ND-1:0][15:0] exp_sum [$];
  logic [7:0] xq [$][4];
  int t_start;
  logic p_iclk = 0, p_ack = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.iclk && !p_iclk) begin
      int node, el; logic [ND-1:0][15:0] s;
      node = 0; el = 0;
      for (int l = 0; l < 4; l++) begin
        el += lat(thr[node], dut.x[l]);
        node = (dut.x[l] > thr[node]) ? 2*node + 2 : 2*node + 1;
      end
      node = 2*(((node - 1) / 2) - 7) + ((node % 2 == 0) ? 1 : 0);
      for (int j = 0; j < ND; j++) s[j] = 16'(cs_value(cs_in[j]) + {{8{tab[j][node][7]}}, tab[j][node]});
      exp_row.push_back(node); exp_lat.push_back(el + 2); exp_sum.push_back(s);
      t_start = 0;
    end
    if (dut.iclk) t_start++;   // cycles with iCLK high
    if (ack_out && !p_ack) begin
      int r, el; logic [ND-1:0][15:0] s;
      r = exp_row.pop_front(); el = exp_lat.pop_front(); s = exp_sum.pop_front();
      lookups++;
      checks++; if (proto != 4'(r)) begin failures++; $display("proto %0d exp %0d", proto, r); end
      checks++; if (t_start != el) begin failures++; $display("latency %0d exp %0d", t_start, el); end
      for (int j = 0; j < ND; j++) begin
        checks++; if (cs_value(cs_out[j]) != s[j]) begin failures++; $display("dec %0d got %h exp %h", j, cs_value(cs_out[j]), s[j]); end
      end
    end
    p_iclk <= dut.iclk; p_ack <= ack_out;
  end

  initial begin
    for (int j = 0; j < ND; j++) begin d[j] = 0; cs_in[j] = '0; end
    for (int l = 0; l < 4; l++) in_x[l] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // thresholds
    for (int n = 0; n < 15; n++) begin
      @(negedge clk); blk_sel = 1; twe = 1; a = 4'(n); thr[n] = 8'($urandom); d[0] = thr[n];
    end
    @(negedge clk); twe = 0;
    // tables
    for (int r = 0; r < 16; r++) begin
      @(negedge clk); lwe = 1; a = 4'(r);
      for (int j = 0; j < ND; j++) begin tab[j][r] = 8'($urandom); d[j] = tab[j][r]; end
    end
    @(negedge clk); lwe = 0; calce = 1;
    // a write during calculation must not land
    @(negedge clk); lwe = 1; a = 4'd0; for (int j = 0; j < ND; j++) d[j] = ~tab[j][0];
    @(negedge clk); lwe = 0;
    for (int i = 0; i < 200; i++) begin
      int node;
      node = 0;
      for (int l = 0; l < 4; l++) begin
        in_x[l] = (i % 4 == 1) ? thr[node] : (i % 8 == 2) ? (thr[node] ^ 8'h80) : 8'($urandom);
        node = (in_x[l] > thr[node]) ? 2*node + 2 : 2*node + 1;
      end
      in_valid = 1;
      while (!in_ready) @(negedge clk);   // ready is stable at the falling edge
      @(negedge clk); in_valid = 0;
      repeat ($urandom % 4) @(negedge clk);
    end
    repeat (400) @(posedge clk);
    checks++; if (lookups != 200) begin failures++; $display("lookups %0d", lookups); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
