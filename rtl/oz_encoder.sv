// oz_encoder -- Oz-encoder of the OzMAC: serialises a weight into one-hot codes
// of its '1' bits, one code per clock cycle, skipping every '0' bit.
//
// How it works: a small FSM holds the bits of the weight that are still to be
// issued ("remaining"). Each cycle the most significant remaining '1' is
// isolated by a priority scan and issued as a one-hot code, and it is cleared
// from the remaining bits. So a weight with k '1' bits is issued in exactly k
// cycles, most significant '1' first (0101 -> 0100, then 0001, as in the
// worked example of the design). The first code is taken straight from the
// incoming weight in the cycle the weight is accepted, so back-to-back weights
// leave no bubble: a weight with k > 0 ones occupies the encoder for k cycles.
// A weight of zero has no '1' to issue; it is accepted and retired in one cycle
// with no code issued (oh_valid low, op_done high).
//
// Interface: valid/ready on the weight side. w_ready is high whenever the FSM
// is IDLE; a weight is taken when w_valid && w_ready. Outputs are
// combinational from the state and the incoming weight:
//   oh       one-hot code of the current '1' (all zero when there is none)
//   oh_valid oh holds a code this cycle
//   oh_first oh is the first code of the weight accepted this cycle
//   op_done  the last code of the weight is issued this cycle (or a zero
//            weight is accepted), so the MAC operation ends with this cycle
// Reset is synchronous and active low; it empties the FSM.
//
// The FSM and the one-hot, MSB-first order follow the design description; the
// valid/ready handshake, the zero-weight handling and the reset are choices of
// this implementation.
module oz_encoder
  import oz_pkg::*;
#(
  parameter int unsigned WGT_W = OZ_WGT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             w_valid,
  output logic             w_ready,
  input  logic [WGT_W-1:0] w_data,
  output logic [WGT_W-1:0] oh,
  output logic             oh_valid,
  output logic             oh_first,
  output logic             op_done
);

  oz_state_e        state_q, state_d;
  logic [WGT_W-1:0] rem_q, rem_d;   // '1' bits still to be issued
  logic [WGT_W-1:0] src;            // bits the code is taken from this cycle
  logic [WGT_W-1:0] rest;           // src without the bit issued this cycle
  logic             active;         // src holds a weight this cycle
  logic             take;           // weight handshake

  assign w_ready = (state_q == OZ_IDLE);
  assign take    = w_valid && w_ready;
  assign active  = (state_q == OZ_BUSY) || w_valid;
  assign src     = (state_q == OZ_BUSY) ? rem_q : w_data;

  // Priority scan from the MSB down: isolate the leading '1'.
  always_comb begin
    oh = '0;
    if (active) begin
      for (int i = int'(WGT_W) - 1; i >= 0; i--) begin
        if (src[i] && (oh == '0)) oh[i] = 1'b1;
      end
    end
  end

  assign rest     = src & ~oh;
  assign oh_valid = (oh != '0);
  assign oh_first = take && (w_data != '0);
  assign op_done  = (oh_valid && (rest == '0)) || (take && (w_data == '0));

  always_comb begin
    state_d = state_q;
    rem_d   = rem_q;
    if (active && (state_q == OZ_BUSY || take)) begin
      if (rest != '0) begin
        state_d = OZ_BUSY;
        rem_d   = rest;
      end else begin
        state_d = OZ_IDLE;
        rem_d   = '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= OZ_IDLE;
      rem_q   <= '0;
    end else begin
      state_q <= state_d;
      rem_q   <= rem_d;
    end
  end

  // At most one bit position is issued per cycle.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(oh));
  // While BUSY there is always a '1' left to issue.
  a_busy_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
                                   (state_q == OZ_BUSY) |-> (rem_q != '0));

endmodule
