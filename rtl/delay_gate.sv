// delay_gate: matched delay on the last handshake wire.
//
// Delays the last block's ACK by DELAY cycles before it is inverted into the
// request REQ_O that returns to the last block, giving the ripple-carry adders
// and the output register time to take the result. The paper shows a delay
// gate and an inverter in this position without giving the delay; DELAY = 2
// cycles is this design's choice (the register captures one cycle after ACK
// rises). A shift register; reset clears it.
module delay_gate #(
  parameter int unsigned DELAY = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);

  logic [DELAY:0] sr;

  assign sr[0] = d;
  for (genvar i = 0; i < DELAY; i++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) sr[i+1] <= 1'b0;
      else        sr[i+1] <= sr[i];
    end
  end

  assign q = sr[DELAY];

endmodule
