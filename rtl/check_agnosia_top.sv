// check_agnosia_top - check-agnosia decoder for one error type (X or Z) of
// a CSS quantum LDPC code: a flooded normalized min-sum decoder followed,
// when it fails, by check-agnosia post-processing (Algorithm 2 of the paper:
// re-decode with the support of each of the LAMBDA least reliable checks
// erased, stop on the full syndrome).
//
// The paper proposes two architectures and this top builds either:
//   HW_REUSE = 0 (default): dedicated hardware, ca_dedicated. LAMBDA MP*
//     decoders run in parallel and may start before the initial MP decoder
//     has finished; worst case (1+2*I_DELTA) + S + (1+2*I_MAX) cycles,
//     113 cycles (1.13 us at 100 MHz) for the defaults.
//   HW_REUSE = 1: hardware reuse, ca_hw_reuse. The initial decoder runs the
//     LAMBDA MP* rounds one after the other; worst case with
//     I_DELTA = I_MAX: (1+2*I_MAX) + S + LAMBDA*(1+2*I_MAX) cycles.
// S = ceil(LAMBDA/2)*ceil(log2 M) is the sorting time, 45 cycles here.
//
// Defaults are the paper's flooded FPGA configuration: 441 checks x 882
// qubits (Z = 63), 6-bit messages, 8-bit a posteriori LLRs, LAMBDA = 10,
// I_MAX = 30, I_DELTA = 3, normalization 0.875 (NMS_K = 3). The prior LLR
// (LLR_init = 12 in the paper) is the input llr_i.
//
// Interface: start_i (one cycle) samples syn_i and llr_i and starts a
// decoding, aborting any decoding in progress; busy_o is high until done_o,
// a one-cycle pulse in which success_o, ehat_o (1 = error on the qubit),
// pp_used_o (the estimate comes from an MP* decoder) and pp_index_o (which
// one, 0 = least reliable check) are valid. pp_list_o lists the sorted
// unreliable checks once the sorting unit has finished.
//
// Lint notes: the unused-signal and reset-in-assertion reports for this top
// come from the core it instantiates; see ca_dedicated and ca_hw_reuse.
module check_agnosia_top
  import ca_pkg::*;
#(
  parameter bit          HW_REUSE = 1'b0,
  parameter int unsigned Z        = 63,
  parameter int unsigned LAMBDA   = 10,
  parameter int unsigned I_MAX    = 30,
  parameter int unsigned I_DELTA  = 3,
  parameter int unsigned NMS_K    = 3,
  localparam int unsigned N   = NB * Z,
  localparam int unsigned M   = MB * Z,
  localparam int unsigned CIW = $clog2(M),
  localparam int unsigned KW  = (LAMBDA > 1) ? $clog2(LAMBDA) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start_i,
  input  logic [M-1:0]   syn_i,
  input  msg_t           llr_i,
  output logic           busy_o,
  output logic           done_o,
  output logic           success_o,
  output logic [N-1:0]   ehat_o,
  output logic           pp_used_o,
  output logic [KW-1:0]  pp_index_o,
  output logic [CIW-1:0] pp_list_o [LAMBDA]
);

  if (HW_REUSE) begin : g_reuse
    ca_hw_reuse #(
      .Z(Z), .LAMBDA(LAMBDA), .I_MAX(I_MAX), .I_DELTA(I_DELTA), .NMS_K(NMS_K)
    ) u_core (
      .clk(clk), .rst_n(rst_n), .start_i(start_i), .syn_i(syn_i), .llr_i(llr_i),
      .busy_o(busy_o), .done_o(done_o), .success_o(success_o), .ehat_o(ehat_o),
      .pp_used_o(pp_used_o), .pp_index_o(pp_index_o), .pp_list_o(pp_list_o)
    );
  end else begin : g_dedicated
    ca_dedicated #(
      .Z(Z), .LAMBDA(LAMBDA), .I_MAX(I_MAX), .I_DELTA(I_DELTA), .NMS_K(NMS_K)
    ) u_core (
      .clk(clk), .rst_n(rst_n), .start_i(start_i), .syn_i(syn_i), .llr_i(llr_i),
      .busy_o(busy_o), .done_o(done_o), .success_o(success_o), .ehat_o(ehat_o),
      .pp_used_o(pp_used_o), .pp_index_o(pp_index_o), .pp_list_o(pp_list_o)
    );
  end

endmodule
