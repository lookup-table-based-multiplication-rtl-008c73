// input_buffer: per-block buffer of encoder operands.
//
// Holds the four subvector elements that the block's decision tree compares
// (one per tree level) for the coming lookups. It is a small FIFO of DEPTH
// entries with a valid/ready write side; the head entry is presented to the
// encoder (`x`, `x_valid`) and stays stable until the block controller pops it
// when the block's lookup has completed. The paper names an input buffer in each
// compute block without describing it; its depth (2) and the valid/ready
// loading are this design's choice. Reset empties it.
module input_buffer
  import maddness_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [X_W-1:0] in_x [TREE_LVL],
  output logic           x_valid,
  output logic [X_W-1:0] x [TREE_LVL],
  input  logic           pop
);

  localparam int unsigned PW = (DEPTH <= 1) ? 1 : $clog2(DEPTH);

  logic [X_W-1:0]  mem [DEPTH][TREE_LVL];
  logic [PW-1:0]   rd_ptr, wr_ptr;
  logic [PW:0]     count;
  logic            push, do_pop;

  assign in_ready = (count < (PW+1)'(DEPTH));
  assign x_valid  = (count != '0);
  assign push     = in_valid && in_ready;
  assign do_pop   = pop && x_valid;
  assign x        = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_x;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push)   wr_ptr <= (wr_ptr == PW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop) rd_ptr <= (rd_ptr == PW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) pop |-> x_valid);

endmodule
