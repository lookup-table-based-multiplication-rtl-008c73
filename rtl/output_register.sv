// output_register: holds the macro's results.
//
// Captures the N_dec resolved sums from the ripple-carry adders when the last
// compute block signals a valid partial sum (rising edge of ACK_Ns) and raises
// `out_valid` for one cycle; the results stay until the next capture. Reset
// clears it. The edge detection is this design's choice; the paper states only
// that the final sums are stored in an output register.
module output_register
  import maddness_pkg::*;
#(
  parameter int unsigned N_DEC = N_DEC_DEFAULT
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ack,
  input  logic [ACC_W-1:0] y [N_DEC],
  output logic [ACC_W-1:0] q [N_DEC],
  output logic             out_valid
);

  logic ack_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_d     <= 1'b0;
      out_valid <= 1'b0;
      for (int j = 0; j < N_DEC; j++) q[j] <= '0;
    end else begin
      ack_d     <= ack;
      out_valid <= ack && !ack_d;
      if (ack && !ack_d) q <= y;
    end
  end

endmodule
