// pipeline_controller: self-synchronous controller of one compute block.
//
// Sequences one lookup of its block and exchanges four-phase handshakes with the
// neighbouring blocks. Each link between a producer block k and a consumer block
// k+1 carries two wires, named after the paper's ACK_k and REQ_{k+1}:
//   ACK_k      (producer -> consumer) high: block k's latched partial sum is valid
//   REQ_{k+1}  (consumer -> producer) high: block k+1 has no claim on that sum
// One transfer is the four phases ACK up, REQ down (consumer has latched its own
// result), ACK down, REQ up. The wires' names are the paper's; which way each
// one points, what its levels mean and the phase order are this design's
// choice, since the paper states only that a four-phase protocol is used.
//
// A block starts a lookup (`iclk` high, precharge `pche` off) when CALCE is
// high, its input buffer has an entry, its upstream sum is valid (ack_in), the
// downstream block has released its previous sum (req_in) and its own previous
// transfer has completed (ack_out low, req_out high). It enables the read
// wordlines as soon as the encoder is done, and finishes when the block's read
// completion RCD rises: then it raises ack_out, lowers req_out, pops the input
// buffer and returns to precharge. Outside a lookup it returns req_out high once
// the upstream has dropped ack_in, and drops ack_out once the downstream has
// dropped req_in. The real circuit has no clock; here every event takes at least
// one cycle of `clk`, which plays the role of the gate delays. Reset leaves the
// block precharged with ack_out low and req_out high.
module pipeline_controller (
  input  logic clk,
  input  logic rst_n,
  input  logic calce,     // calculation enable
  input  logic x_valid,   // input buffer holds an operand set
  input  logic ack_in,    // ACK_{k-1}
  output logic req_out,   // REQ_k
  output logic ack_out,   // ACK_k
  input  logic req_in,    // REQ_{k+1}
  input  logic enc_done,  // encoder has produced its one-hot wordline
  input  logic rcd,       // all decoders of the block have latched
  output logic iclk,      // encoder evaluation clock (0 = precharge)
  output logic pche,      // decoder bitline precharge
  output logic rwl_en,    // read wordline driver enable
  output logic x_pop,     // consume the input buffer head
  output logic busy
);

  typedef enum logic {S_PRECHARGE, S_EVAL} state_t;
  state_t state;
  logic   start, finish;

  assign start  = (state == S_PRECHARGE) && calce && x_valid && ack_in && req_in
                  && !ack_out && req_out;
  assign finish = (state == S_EVAL) && rcd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_PRECHARGE;
      ack_out <= 1'b0;
      req_out <= 1'b1;
    end else begin
      case (state)
        S_PRECHARGE: begin
          if (start) state <= S_EVAL;
          if (!req_out && !ack_in) req_out <= 1'b1;
          if (ack_out && !req_in)  ack_out <= 1'b0;
        end
        S_EVAL: begin
          if (finish) begin
            state   <= S_PRECHARGE;
            ack_out <= 1'b1;
            req_out <= 1'b0;
          end
        end
        default: state <= S_PRECHARGE;
      endcase
    end
  end

  assign iclk   = (state == S_EVAL);
  assign pche   = (state != S_EVAL);
  assign rwl_en = (state == S_EVAL) && enc_done;
  assign x_pop  = finish;
  assign busy   = (state == S_EVAL);

  // Four-phase rules: a new result is only produced once the previous one was
  // released, and the upstream sum must stay valid throughout a lookup.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !ack_out);
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> ack_in);

endmodule
