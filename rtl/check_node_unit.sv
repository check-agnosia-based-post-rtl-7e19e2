// check_node_unit - normalized min-sum check-node processor with the
// check-reliability adder.
//
// For one check c of degree DC it takes the incoming qubit-to-check messages
// mu(q->c) and the syndrome bit s_c, and produces the outgoing messages
//   mu(c->q) = (-1)^(s_c + sum of the other signs) * s_NMS * min over the
//              other incoming magnitudes,
// using the usual first/second-minimum compression: min1 and its position,
// and min2, are found once; each output takes min2 if it is the position of
// min1 and min1 otherwise. The normalization s_NMS = 1 - 2^-NMS_K is done
// with one shift and one subtract (0.875 for NMS_K = 3, the paper's flooded
// value; 0.9375 for NMS_K = 4), truncating toward zero.
//
// The same minima give the check reliability delta_c = min1 + min2 of the
// incoming magnitudes (Algorithm 2 of the check-agnosia scheme), so the only
// extra hardware is one adder, as the paper states.
//
// Purely combinational; the flooded decoder registers the outputs in its
// check-node phase. Zero counts as a positive sign. The minimum search is a
// linear scan, the simplest circuit with the same result as the paper's tree
// finder; on equal magnitudes the lowest position is taken as min1.
module check_node_unit
  import ca_pkg::*;
#(
  parameter int unsigned NMS_K = 3
) (
  input  msg_t       q2c_i [DC],
  input  logic       syn_i,
  output msg_t       c2q_o [DC],
  output rel_t       delta_o
);

  localparam int unsigned MW = QW - 1;  // magnitude width

  logic [MW-1:0] mag [DC];
  logic [DC-1:0] sgn;
  logic [MW-1:0] min1, min2, s1, s2;
  logic [$clog2(DC)-1:0] pos1;
  logic          sprod;

  always_comb begin
    for (int j = 0; j < DC; j++) begin
      sgn[j] = q2c_i[j][QW-1];
      // inputs are kept within -31..31, so the magnitude fits in MW bits
      mag[j] = sgn[j] ? MW'(-q2c_i[j]) : MW'(q2c_i[j]);
    end
    min1 = '1;
    min2 = '1;
    pos1 = '0;
    for (int j = 0; j < DC; j++) begin
      if (mag[j] < min1) begin
        min2 = min1;
        min1 = mag[j];
        pos1 = ($clog2(DC))'(j);
      end else if (mag[j] < min2) begin
        min2 = mag[j];
      end
    end
    sprod = syn_i ^ (^sgn);
    s1 = min1 - (min1 >> NMS_K);
    s2 = min2 - (min2 >> NMS_K);
    for (int j = 0; j < DC; j++) begin
      logic [MW-1:0] m;
      m = (pos1 == ($clog2(DC))'(j)) ? s2 : s1;
      c2q_o[j] = (sprod ^ sgn[j]) ? -msg_t'({1'b0, m}) : msg_t'({1'b0, m});
    end
    delta_o = rel_t'(min1) + rel_t'(min2);
  end

endmodule
