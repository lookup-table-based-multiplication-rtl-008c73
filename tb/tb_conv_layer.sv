// tb_conv_layer: a 3x3 convolution layer run on the macro at its default size,
// mapped as the accelerator is meant to be used: the 32 input channels go to
// the 32 compute blocks and 16 kernels to the 16 decoder positions.
//
// Offline part (done here in the testbench, as a host would):
//  * every channel k gets a decision tree (15 random thresholds) and 16
//    prototype 3x3 patches c[k][r], each the mean of the image patches that the
//    tree sends to that leaf (a one-shot stand-in for MADDNESS training);
//  * the table entry T[k][j][r] = clamp8(round(<c[k][r], w[j][k]> / 64)) is the
//    precomputed dot product of prototype r with kernel j's weights for channel
//    k, scaled into INT8.
// Online part: for each output pixel, the host takes the 3x3 patch of every
// channel and sends elements a0, a3, a6, a7 of it (row-major) to the four tree
// levels of that channel's block. The macro's result must equal
//     y[j] = sum over k of T[k][j][tree_k(a0, a3, a6, a7)]   (mod 2^16)
// exactly. The testbench also reports, for information, how far the
// approximation is from the exact convolution, scaled by 1/64 like the tables.
// The channel-to-block and kernel-to-decoder mapping and the choice of a0, a3,
// a6, a7 follow the paper. The image size, the random data, the
// one-shot prototype training and the 1/64 scaling are this testbench's own.
// Results are counted in order at y_valid; the run ends after all 16 pixels,
// and a watchdog stops it if they never arrive.
module tb_conv_layer;
  import maddness_pkg::*;
  localparam int ND = N_DEC_DEFAULT;
  localparam int NS = N_S_DEFAULT;
  localparam int H = 6, W = 6;                 // input size; output is 4x4
  localparam int OH = H - 2, OW = W - 2, NPIX = OH * OW;
  localparam int SEL [4] = '{0, 3, 6, 7};      // patch elements compared by the tree

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
  longint abs_err = 0, abs_ref = 0;

  initial begin
    repeat (200000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [7:0]  img  [NS][H][W];                // unsigned activations
  logic signed [7:0] wt [ND][NS][9];          // kernel weights
  logic [7:0]  thr  [NS][15];
  logic [7:0]  proto[NS][16][9];
  logic [7:0]  tab  [NS][ND][16];
  logic [ND-1:0][15:0] ref_y [NPIX];
  longint exact [NPIX][ND];
  logic feed_go = 0;

  function automatic logic [7:0] patch(int k, int p, int e);
    return img[k][p / OW + e / 3][p % OW + e % 3];
  endfunction

  function automatic int walk(int k, int p);
    automatic int node = 0;
    for (int l = 0; l < 4; l++) node = (patch(k, p, SEL[l]) > thr[k][node]) ? 2*node + 2 : 2*node + 1;
    return 2*(((node - 1) / 2) - 7) + ((node % 2 == 0) ? 1 : 0);
  endfunction

  initial begin
    for (int k = 0; k < NS; k++) begin
      for (int i = 0; i < H; i++) for (int j = 0; j < W; j++) img[k][i][j] = 8'($urandom);
      for (int n = 0; n < 15; n++) thr[k][n] = 8'(64 + $urandom % 128);
      for (int r = 0; r < 16; r++) for (int e = 0; e < 9; e++) proto[k][r][e] = 8'($urandom);
    end
    // prototypes "trained" on this image: mean of the patches that land in each
    // leaf (leaves no patch reaches keep their random prototype)
    for (int k = 0; k < NS; k++) for (int r = 0; r < 16; r++) begin
      automatic int cnt = 0;
      automatic int acc [9] = '{default: 0};
      for (int p = 0; p < NPIX; p++) if (walk(k, p) == r) begin
        cnt++; for (int e = 0; e < 9; e++) acc[e] += int'(patch(k, p, e));
      end
      if (cnt > 0) for (int e = 0; e < 9; e++) proto[k][r][e] = 8'(acc[e] / cnt);
    end
    for (int j = 0; j < ND; j++) for (int k = 0; k < NS; k++) for (int e = 0; e < 9; e++)
      wt[j][k][e] = 8'($signed(6'($urandom)));               // small weights, -32..31
    for (int k = 0; k < NS; k++) for (int j = 0; j < ND; j++) for (int r = 0; r < 16; r++) begin
      automatic longint dp = 0;
      for (int e = 0; e < 9; e++) dp += longint'(proto[k][r][e]) * longint'(wt[j][k][e]);
      dp = (dp >= 0) ? (dp + 32) / 64 : -((-dp + 32) / 64);
      if (dp > 127) dp = 127; if (dp < -128) dp = -128;
      tab[k][j][r] = 8'(dp);
    end
    for (int p = 0; p < NPIX; p++) begin
      ref_y[p] = '0;
      for (int j = 0; j < ND; j++) exact[p][j] = 0;
      for (int k = 0; k < NS; k++) begin
        automatic int r = walk(k, p);
        for (int j = 0; j < ND; j++) begin
          ref_y[p][j] = 16'(ref_y[p][j] + {{8{tab[k][j][r][7]}}, tab[k][j][r]});
          for (int e = 0; e < 9; e++) exact[p][j] += longint'(patch(k, p, e)) * longint'(wt[j][k][e]);
        end
      end
    end
  end

  for (genvar k = 0; k < NS; k++) begin : g_feed
    initial begin
      for (int l = 0; l < 4; l++) x_in[k][l] = 0;
      wait (feed_go);
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk);
        for (int l = 0; l < 4; l++) x_in[k][l] = patch(k, p, SEL[l]);
        x_valid[k] = 1;
        while (!x_ready[k]) @(negedge clk);
        @(negedge clk); x_valid[k] = 0;
      end
    end
  end

  always @(posedge clk) if (rst_n && y_valid) begin
    if (results < NPIX) begin
      for (int j = 0; j < ND; j++) begin
        automatic longint ex = (exact[results][j] + 32) / 64;
        automatic longint got = longint'($signed(y[j]));
        checks++;
        if (y[j] != ref_y[results][j]) begin
          failures++; if (failures < 10) $display("pixel %0d kernel %0d y=%h exp %h", results, j, y[j], ref_y[results][j]);
        end
        abs_err += (got > ex) ? got - ex : ex - got;
        abs_ref += (ex > 0) ? ex : -ex;
      end
    end
    results++;
  end

  initial begin
    int t0;
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
    @(negedge clk); calce = 1; feed_go = 1;
    t0 = 0;
    while (results < NPIX && t0 < 100000) begin @(posedge clk); t0++; end
    repeat (100) @(posedge clk);
    checks++; if (results != NPIX) begin failures++; $display("%0d results for %0d pixels", results, NPIX); end
    $display("conv layer: %0d pixels x %0d kernels in %0d cycles; mean |approx - exact/64| = %0d.%02d, mean |exact/64| = %0d",
             NPIX, ND, t0, abs_err / (NPIX*ND), (abs_err * 100 / (NPIX*ND)) % 100, abs_ref / (NPIX*ND));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
