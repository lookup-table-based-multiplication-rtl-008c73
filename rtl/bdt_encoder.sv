// bdt_encoder: 4-level binary decision tree that maps a subvector to one of 16
// prototypes, producing a one-hot read wordline.
//
// Fifteen comparators (dlc) are wired as a tournament. Comparator n compares the
// operand of its level with its own threshold t_n; its children are 2n+1 (taken
// when x <= t_n) and 2n+2 (taken when x > t_n). Level L (root = 0) compares
// subvector element x[L]. A child is evaluated only after its parent has decided
// and chosen it, so exactly four comparators fire per lookup and the other
// eleven stay precharged. The leaves n = 7..14 drive wordlines 2(n-7) (x <= t)
// and 2(n-7)+1 (x > t), so the wordline index is the 4-bit word of branch
// decisions, root first: {b0,b1,b2,b3}.
//
// The node numbering, the children and the leaf-to-wordline order are those of
// the paper's figures. The paper's figures label the upper branch "x >= t" while
// its comparator truth table sends a tie to the same rail as "t > x"; this RTL
// follows the truth table, so a tie takes the lower branch. A threshold trained
// with the ">=" rule is loaded as t-1 to get the same tree.
//
// Interface: `eval` is the evaluation clock from the block controller (low =
// precharge all comparators); `rwl` becomes one-hot, and `done` high, 4 to 32
// cycles after `eval` rises (1 to 8 per level, see dlc), and both stay until
// `eval` falls. `fired` shows which comparators have left precharge.
// Thresholds are written one at a time with `t_we`, `t_addr` (0..14), `t_wdata`.
module bdt_encoder
  import maddness_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  t_we,
  input  logic [ROW_AW-1:0]     t_addr,
  input  logic [X_W-1:0]        t_wdata,
  input  logic                  eval,
  input  logic [X_W-1:0]        x [TREE_LVL],
  output logic [LUT_ROWS-1:0]   rwl,
  output logic                  done,
  output logic [N_DLC-1:0]      fired,
  output logic [X_W-1:0]        t_q [N_DLC]
);

  logic [N_DLC-1:0] en, yp, yn, dn;

  for (genvar n = 0; n < N_DLC; n++) begin : g_dlc
    localparam int LVL = (n < 1) ? 0 : (n < 3) ? 1 : (n < 7) ? 2 : 3;
    if (n == 0) begin : g_root
      assign en[n] = eval;
    end else if ((n % 2) == 1) begin : g_low   // lower child of (n-1)/2
      assign en[n] = eval && dn[(n-1)/2] && yn[(n-1)/2];
    end else begin : g_high                   // upper child of (n-2)/2
      assign en[n] = eval && dn[(n-2)/2] && yp[(n-2)/2];
    end

    dlc u_dlc (
      .clk    (clk),
      .rst_n  (rst_n),
      .t_we   (t_we && (t_addr == ROW_AW'(n))),
      .t_wdata(t_wdata),
      .eval   (en[n]),
      .x      (x[LVL]),
      .yp     (yp[n]),
      .yn     (yn[n]),
      .done   (dn[n]),
      .t_q    (t_q[n])
    );
  end

  for (genvar l = 0; l < 8; l++) begin : g_leaf
    assign rwl[2*l]   = dn[7+l] && yn[7+l];
    assign rwl[2*l+1] = dn[7+l] && yp[7+l];
  end

  assign done  = |rwl;
  assign fired = en;

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(rwl));

endmodule
