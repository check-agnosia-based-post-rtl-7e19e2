// nms_flooded_decoder - fully parallel flooded normalized min-sum decoder,
// used as the initial MP decoder and as every MP* decoder of the
// check-agnosia post-processor.
//
// The Tanner graph is instantiated in hardware: one check_node_unit per
// check, one qubit_node_unit per qubit, and registers for the messages of
// every edge, wired by the graph functions of ca_pkg. As in the paper, an
// iteration takes two clock cycles and one more cycle loads the data, so a
// decoding of i iterations takes 1 + 2i cycles and the worst case is
// 1 + 2*I_MAX:
//   load  (cycle with start_i = 1): syndrome, prior LLR and erasure mask are
//         sampled; every qubit-to-check message is set to gamma'_q.
//   CN    check-node phase: all check-to-qubit messages are registered.
//   QN    qubit-node phase: all qubit-to-check messages, the hard decisions
//         and the syndrome test of those decisions are registered.
// Decoding stops after the QN phase in which the hard decisions meet the
// whole syndrome (success_o = 1), or after I_MAX iterations (success_o = 0).
// This is the MP* of Algorithm 2: an MP* decoder differs from MP only by its
// erasure mask erase_i, which selects gamma'_q = 0 instead of llr_i.
//
// Check reliability: delta_o[c] = min1 + min2 of the messages entering check
// c, straight from the check-node adders. It is stable during both cycles of
// an iteration; delta_stb_o is high in the QN cycle of iteration I_DELTA, so
// that the sorting unit can capture the values of that iteration with its
// own registers (no extra register in the decoder).
//
// Interface: start_i starts a decoding from any state; abort_i returns to
// idle (outputs kept). fin_o is high from the end of a decoding until the
// next start or abort; ehat_o, success_o and iter_o are then valid.
//
// The order CN-then-QN (messages initialised to the prior in the load cycle)
// and the stop test on the freshly computed hard decisions are choices of
// this design; the paper fixes only the cycle counts.
//
// Lint notes: the 8-bit a posteriori LLRs (apost) of the qubit units are
// left unconnected; with 6-bit messages they never saturate and the hard
// decision is taken from the same sum. rst_n also appears in the
// disable iff of the assertion, which lint reports as a reset used both
// asynchronously and in a sampled expression; that use is by design.
module nms_flooded_decoder
  import ca_pkg::*;
#(
  parameter int unsigned Z       = 63,
  parameter int unsigned I_MAX   = 30,
  parameter int unsigned I_DELTA = 3,
  parameter int unsigned NMS_K   = 3,
  localparam int unsigned N  = NB * Z,
  localparam int unsigned M  = MB * Z,
  localparam int unsigned E  = M * DC,
  localparam int unsigned IW = $clog2(I_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_i,
  input  logic          abort_i,
  input  logic [M-1:0]  syn_i,
  input  msg_t          llr_i,
  input  logic [N-1:0]  erase_i,
  output logic          busy_o,
  output logic          fin_o,
  output logic          success_o,
  output logic [N-1:0]  ehat_o,
  output logic [IW-1:0] iter_o,
  output rel_t          delta_o [M],
  output logic          delta_stb_o
);

  typedef enum logic [1:0] {S_IDLE, S_CN, S_QN, S_FIN} state_t;

  state_t        state;
  logic [M-1:0]  syn_r;
  logic [N-1:0]  erase_r;
  msg_t          llr_r;
  msg_t          q2c      [E];
  msg_t          c2q      [E];
  msg_t          q2c_next [E];
  msg_t          c2q_next [E];
  msg_t          q2c_load [E];
  logic [N-1:0]  hd_next;
  logic [M-1:0]  par;
  logic          syn_ok;
  logic [IW-1:0] iter;
  logic          last_iter;

  // ---------------------------------------------------------------- checks
  for (genvar c = 0; c < M; c++) begin : g_cn
    msg_t in [DC];
    msg_t out [DC];
    logic [DC-1:0] hq;
    for (genvar j = 0; j < DC; j++) begin : g_e
      localparam int unsigned Q = check_qubit(c, j, Z);
      assign in[j] = q2c[c*DC + j];
      assign c2q_next[c*DC + j] = out[j];
      assign hq[j] = hd_next[Q];
      assign q2c_load[c*DC + j] = erase_i[Q] ? msg_t'(0) : llr_i;
    end
    check_node_unit #(.NMS_K(NMS_K)) u_cnu (
      .q2c_i  (in),
      .syn_i  (syn_r[c]),
      .c2q_o  (out),
      .delta_o(delta_o[c])
    );
    assign par[c] = syn_r[c] ^ (^hq);
  end

  // ---------------------------------------------------------------- qubits
  for (genvar q = 0; q < N; q++) begin : g_qn
    msg_t in [DV];
    msg_t out [DV];
    msg_t gam;
    llr_t apost;
    for (genvar k = 0; k < DV; k++) begin : g_e
      localparam int unsigned EI = qubit_edge(q, k, Z);
      assign in[k] = c2q[EI];
      assign q2c_next[EI] = out[k];
    end
    assign gam = erase_r[q] ? msg_t'(0) : llr_r;
    qubit_node_unit u_qnu (
      .gamma_i(gam),
      .c2q_i  (in),
      .q2c_o  (out),
      .apost_o(apost),
      .hd_o   (hd_next[q])
    );
  end

  assign syn_ok    = ~|par;
  assign last_iter = (iter == IW'(I_MAX - 1));

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      iter      <= '0;
      success_o <= 1'b0;
      ehat_o    <= '0;
      syn_r     <= '0;
      erase_r   <= '0;
      llr_r     <= '0;
    end else if (start_i) begin
      state     <= S_CN;
      iter      <= '0;
      success_o <= 1'b0;
      ehat_o    <= '0;
      syn_r     <= syn_i;
      erase_r   <= erase_i;
      llr_r     <= llr_i;
    end else if (abort_i) begin
      state <= S_IDLE;
    end else begin
      unique case (state)
        S_CN: state <= S_QN;
        S_QN: begin
          iter      <= iter + 1'b1;
          ehat_o    <= hd_next;
          success_o <= syn_ok;
          state     <= (syn_ok || last_iter) ? S_FIN : S_CN;
        end
        default: ;
      endcase
    end
  end

  // Message memories (no reset needed: written in the load cycle before use).
  always_ff @(posedge clk) begin
    if (start_i)                       q2c <= q2c_load;
    else if (!abort_i && state == S_QN) q2c <= q2c_next;
    if (!start_i && !abort_i && state == S_CN) c2q <= c2q_next;
  end

  assign busy_o      = (state == S_CN) || (state == S_QN);
  assign fin_o       = (state == S_FIN);
  assign iter_o      = iter;
  assign delta_stb_o = (state == S_QN) && (iter == IW'(I_DELTA - 1)) && !start_i && !abort_i;

  initial assert (I_DELTA >= 1 && I_DELTA <= I_MAX)
    else $error("I_DELTA must lie in 1..I_MAX");
  assert property (@(posedge clk) disable iff (!rst_n) fin_o |-> !busy_o);

endmodule
