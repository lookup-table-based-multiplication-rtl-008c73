// rcd_tree: read-completion detection tree.
//
// Raises `all_done` when every one of its N inputs is high. It is the AND of the
// inputs, built as the paper's NAND-NOR tournament: the first level is 2-input
// NANDs, the next 2-input NORs, and so on, so two inverting levels give one
// AND level. Unused leaf inputs, up to the next power of two, are tied high. The
// paper uses this structure twice: 8 column completions into one LUT completion
// (RCD_LUT), and the N_dec LUT completions of a block into the block's RCD
// signal. The 2-input gate width is this design's choice (the paper's figure
// shows 4-input NANDs feeding a NOR for the 8-column case); the function is the
// same. Purely combinational.
module rcd_tree #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0] done_in,
  output logic         all_done
);

  localparam int unsigned LEVELS = (N <= 1) ? 0 : $clog2(N);
  localparam int unsigned W      = 1 << LEVELS;

  // node[l] holds level l; node[0] is the padded input row.
  logic [W-1:0] node [LEVELS+1];

  always_comb begin
    for (int unsigned l = 0; l <= LEVELS; l++) node[l] = '0;
    node[0] = {W{1'b1}};
    node[0][N-1:0] = done_in;
    for (int unsigned l = 0; l < LEVELS; l++) begin
      for (int unsigned j = 0; j < (W >> (l + 1)); j++) begin
        if ((l % 2) == 0) node[l+1][j] = ~(node[l][2*j] & node[l][2*j+1]);  // NAND
        else              node[l+1][j] = ~(node[l][2*j] | node[l][2*j+1]);  // NOR
      end
    end
    // An odd number of inverting levels leaves the result inverted.
    all_done = ((LEVELS % 2) == 1) ? ~node[LEVELS][0] : node[LEVELS][0];
  end

endmodule
