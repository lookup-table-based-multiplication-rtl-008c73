// tb_maddness_macro: end-to-end test of the whole macro at its default size
// (32 compute blocks x 16 decoders, 64 kb of lookup tables).
//
// 1. Loads all 15 thresholds and all 16 table rows of every block through the
//    global write port (CALCE low), then tries one write with CALCE high, which
//    must be ignored.
// 2. Streams NPIX output pixels through the pipeline. Block k receives, for
//    each pixel, four operands; some pixels are built to take the fastest path
//    (every comparison decided at the MSB) or the slowest (every operand equal
//    to its threshold, which also exercises the tie rule), the rest are random.
//    Operands are offered with random gaps and CALCE is dropped for a while in
//    the middle of the stream.
// 3. Checks every result, in order, against a reference:
//    y[j] = sum over blocks k of sign-extended T[k][j][row_k], modulo 2^16,
//    where row_k is the reference walk of block k's tree; and checks that the
//    number of results equals the number of pixels.
// 4. Counts how often each mechanism happened, and fails if one never did:
//    best-case and worst-case encoder latency, downstream back-pressure,
//    waiting for the upstream block, waiting for input, CALCE pause, a blocked
//    write, and several blocks evaluating at the same time.
module tb_maddness_macro;
  import maddness_pkg::*;
  localparam int ND = N_DEC_DEFAULT;
  localparam int NS = N_S_DEFAULT;
  localparam int NPIX = 48;

  logic clk = 0, rst_n = 0, calce = 0, wr_lut = 0, wr_thr = 0;
  logic [$clog2(NS)-1:0] wr_blk = 0;
  logic [3:0] wr_addr = 0;
  logic [7:0] wr_data [ND];
  logic [NS-1:0] x_valid = 0, x_ready;
  logic [7:0] x_in [NS][4];
  logic [15:0] y [ND];
  logic y_valid;

  maddness_macro dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, results = 0;
  int n_best = 0, n_worst = 0, n_back = 0, n_up = 0, n_empty = 0, n_calce = 0, n_blocked = 0, n_conc = 0;

  initial begin
    repeat (400000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [7:0] thr [NS][15];
  logic [7:0] tab [NS][ND][16];
  logic [7:0] xs  [NS][NPIX][4];
  logic [ND-1:0][15:0] ref_y [NPIX];
  logic feed_go = 0;

  function automatic int walk(int k, int p);
    automatic int node = 0;
    for (int l = 0; l < 4; l++) node = (xs[k][p][l] > thr[k][node]) ? 2*node + 2 : 2*node + 1;
    return 2*(((node - 1) / 2) - 7) + ((node % 2 == 0) ? 1 : 0);
  endfunction

  // stimulus and reference
  initial begin
    for (int k = 0; k < NS; k++) begin
      for (int n = 0; n < 15; n++) thr[k][n] = 8'($urandom);
      for (int j = 0; j < ND; j++) for (int r = 0; r < 16; r++) tab[k][j][r] = 8'($urandom);
      for (int p = 0; p < NPIX; p++) begin
        automatic int node = 0;
        for (int l = 0; l < 4; l++) begin
          case (p % 6)
            1: xs[k][p][l] = thr[k][node];                                   // all ties: slowest
            2: xs[k][p][l] = {~thr[k][node][7], 7'($urandom)};               // MSB decides: fastest
            default: xs[k][p][l] = 8'($urandom);
          endcase
          node = (xs[k][p][l] > thr[k][node]) ? 2*node + 2 : 2*node + 1;
        end
      end
    end
    for (int p = 0; p < NPIX; p++) begin
      ref_y[p] = '0;
      for (int k = 0; k < NS; k++) begin
        automatic int r = walk(k, p);
        for (int j = 0; j < ND; j++) ref_y[p][j] = 16'(ref_y[p][j] + {{8{tab[k][j][r][7]}}, tab[k][j][r]});
      end
    end
  end

  // per-block operand feeders
  for (genvar k = 0; k < NS; k++) begin : g_feed
    initial begin
      for (int l = 0; l < 4; l++) x_in[k][l] = 0;
      wait (feed_go);
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk);
        repeat ((k + p) % 7 == 0 ? 40 : $urandom % 3) @(negedge clk);
        for (int l = 0; l < 4; l++) x_in[k][l] = xs[k][p][l];
        x_valid[k] = 1;
        while (!x_ready[k]) @(negedge clk);   // ready is stable at the falling edge
        @(negedge clk); x_valid[k] = 0;
      end
    end
  end

  // result checker
  always @(posedge clk) if (rst_n && y_valid) begin
    if (results < NPIX) begin
      for (int j = 0; j < ND; j++) begin
        checks++;
        if (y[j] != ref_y[results][j]) begin
          failures++; if (failures < 10) $display("pixel %0d y[%0d]=%h exp %h", results, j, y[j], ref_y[results][j]);
        end
      end
    end
    results++;
  end

  // mechanism counters
  int busy_cnt;
  for (genvar k = 0; k < NS; k++) begin : g_mon
    int hi = 0;
    always @(posedge clk) if (rst_n) begin
      if (dut.g_blk[k].u_cb.busy) hi++;
      else begin
        if (hi == 6)  n_best++;    // 4 comparators decided at the MSB + 2
        if (hi == 34) n_worst++;   // 4 comparators through all 8 bits + 2
        hi = 0;
      end
      if (!dut.g_blk[k].u_cb.busy && !dut.ack[k+1] && dut.req[k+1]) begin
        if (dut.g_blk[k].u_cb.x_valid && dut.ack[k] && !dut.req[k+2]) n_back++;
        if (dut.g_blk[k].u_cb.x_valid && !dut.ack[k]) n_up++;
        if (!dut.g_blk[k].u_cb.x_valid && dut.ack[k] && dut.req[k+2]) n_empty++;
        if (!calce && dut.g_blk[k].u_cb.x_valid && dut.ack[k] && dut.req[k+2]) n_calce++;
      end
    end
  end
  always @(posedge clk) if (rst_n && $countones(dut.busy) >= 2) n_conc++;

  initial begin
    for (int j = 0; j < ND; j++) wr_data[j] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < NS; k++) begin
      for (int n = 0; n < 15; n++) begin
        @(negedge clk); wr_thr = 1; wr_blk = 5'(k); wr_addr = 4'(n); wr_data[0] = thr[k][n];
      end
      @(negedge clk); wr_thr = 0;
      for (int r = 0; r < 16; r++) begin
        @(negedge clk); wr_lut = 1; wr_blk = 5'(k); wr_addr = 4'(r);
        for (int j = 0; j < ND; j++) wr_data[j] = tab[k][j][r];
      end
      @(negedge clk); wr_lut = 0;
    end
    @(negedge clk); calce = 1;
    // a write while calculating must be ignored
    @(negedge clk); wr_lut = 1; wr_blk = 0; wr_addr = 4'(walk(0, 0));
    for (int j = 0; j < ND; j++) wr_data[j] = ~tab[0][j][walk(0, 0)];
    @(negedge clk); wr_lut = 0;
    @(negedge clk);
    if (dut.g_blk[0].u_cb.g_dec[0].u_dec.u_lut.mem[walk(0, 0)] == tab[0][0][walk(0, 0)]) n_blocked++;
    feed_go = 1;
    repeat (600) @(posedge clk);
    @(negedge clk); calce = 0;
    repeat (200) @(posedge clk);
    @(negedge clk); calce = 1;
    wait (results >= NPIX);
    repeat (200) @(posedge clk);
    checks++; if (results != NPIX) begin failures++; $display("%0d results for %0d pixels", results, NPIX); end
    $display("mechanisms: best=%0d worst=%0d backpressure=%0d upstream_wait=%0d input_wait=%0d calce_pause=%0d blocked_write=%0d concurrent=%0d",
             n_best, n_worst, n_back, n_up, n_empty, n_calce, n_blocked, n_conc);
    checks++; if (n_best == 0)    begin failures++; $display("best case never happened"); end
    checks++; if (n_worst == 0)   begin failures++; $display("worst case never happened"); end
    checks++; if (n_back == 0)    begin failures++; $display("back-pressure never happened"); end
    checks++; if (n_up == 0)      begin failures++; $display("upstream wait never happened"); end
    checks++; if (n_empty == 0)   begin failures++; $display("input wait never happened"); end
    checks++; if (n_calce == 0)   begin failures++; $display("CALCE pause never happened"); end
    checks++; if (n_blocked == 0) begin failures++; $display("blocked write never happened"); end
    checks++; if (n_conc == 0)    begin failures++; $display("no concurrent evaluation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
