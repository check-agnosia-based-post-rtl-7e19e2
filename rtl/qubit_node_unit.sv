// qubit_node_unit - qubit-node processor of the min-sum decoder.
//
// For one qubit q of degree DV it adds the prior reliability gamma'_q and the
// DV incoming check-to-qubit messages. The full-precision sum is the
// a posteriori LLR, saturated to 8 bits; the outgoing message on each edge
// is the sum minus that edge's incoming message (the extrinsic value),
// saturated to the 6-bit message range -31..31. The hard decision is 1
// (error on the qubit) when the a posteriori LLR is negative.
//
// gamma'_q is 0 for a qubit erased by the check-agnosia post-processing and
// the channel value LLR_init otherwise; the multiplexer that chooses between
// them sits in the decoder. Purely combinational; the flooded decoder
// registers the outputs in its qubit-node phase.
module qubit_node_unit
  import ca_pkg::*;
(
  input  msg_t gamma_i,
  input  msg_t c2q_i [DV],
  output msg_t q2c_o [DV],
  output llr_t apost_o,
  output logic hd_o
);

  localparam int unsigned SW = QW + 3;  // holds gamma + DV messages, and sum - message

  logic signed [SW-1:0] sum;

  function automatic msg_t sat_msg(logic signed [SW-1:0] x);
    if (x > SW'(QMAX))  return QMAX;
    if (x < -SW'(QMAX)) return -QMAX;
    return QW'(x);
  endfunction

  function automatic llr_t sat_llr(logic signed [SW-1:0] x);
    if (x > SW'(AMAX))  return AMAX;
    if (x < -SW'(AMAX)) return -AMAX;
    return AW'(x);
  endfunction

  always_comb begin
    sum = SW'(gamma_i);
    for (int k = 0; k < DV; k++) sum += SW'(c2q_i[k]);
    for (int k = 0; k < DV; k++) q2c_o[k] = sat_msg(sum - SW'(c2q_i[k]));
    apost_o = sat_llr(sum);
    hd_o    = sum[SW-1];
  end

endmodule
