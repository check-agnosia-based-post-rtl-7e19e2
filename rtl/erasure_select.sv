// erasure_select - support decoder for the check-agnosia erasure.
//
// An MP* decoder of the check-agnosia post-processing is run with the prior
// reliability of every qubit in the support N(c_k) of one unreliable check
// c_k set to zero. This block turns the index c_k into that qubit mask:
// qubit q is flagged when c_k is one of its DV neighbour checks, i.e. DV
// constant comparisons per qubit. Each flag then steers one of the |Q|
// multiplexers (gamma'_q = 0 or gamma_q) that the paper adds per decoder.
// With en_i = 0 (the initial MP decoder) no qubit is flagged.
//
// Combinational; the decoder samples the mask in its load cycle.
module erasure_select
  import ca_pkg::*;
#(
  parameter int unsigned Z = 63,
  localparam int unsigned N = NB * Z,
  localparam int unsigned M = MB * Z,
  localparam int unsigned CIW = $clog2(M)
) (
  input  logic           en_i,
  input  logic [CIW-1:0] ck_i,
  output logic [N-1:0]   erase_o
);

  for (genvar q = 0; q < N; q++) begin : g_q
    logic [DV-1:0] hit;
    for (genvar k = 0; k < DV; k++) begin : g_k
      localparam int unsigned C = qubit_check(q, k, Z);
      assign hit[k] = (ck_i == CIW'(C));
    end
    assign erase_o[q] = en_i & (|hit);
  end

endmodule
