// ca_dedicated - check-agnosia decoder for a CSS quantum LDPC code,
// dedicated-hardware (parallel post-processing) architecture, Fig. 1 case 2
// of the paper and the default architecture of check_agnosia_top.
//
// Decodes one error type from its syndrome (Algorithm 2, "check-agnosia
// without system solver"):
//   1. the initial flooded NMS decoder (MP) runs for up to I_MAX iterations;
//   2. at iteration I_DELTA the check reliabilities delta_c = min1 + min2 are
//      captured by the sorting unit, which, while MP keeps running, extracts
//      the LAMBDA least reliable checks c_1..c_LAMBDA;
//   3. LAMBDA MP* decoders then start together; MP* number k is the same
//      flooded NMS decoder with the prior reliability of every qubit in the
//      support of c_k set to zero, and it stops on the full syndrome.
// The result of MP has priority: if MP meets the syndrome, its estimate is
// returned at once and the post-processing is abandoned. If MP fails, the
// first MP* to meet the syndrome wins (on a tie, or when several have already
// succeeded by the time MP fails, the one with the lowest k, i.e. the least
// reliable check). If all MP* fail, the MP estimate is returned with
// success_o = 0.
//
// Timing, with start_i in cycle 0 and done_o in cycle T:
//   MP succeeds after i iterations:        T = 1 + 2i
//   post-processing, MP* k after j iters:  T = max(1 + 2*I_MAX_mp,
//        (1 + 2*I_DELTA) + ceil(LAMBDA/2)*ceil(log2 M) + (1 + 2j))
// so the worst case is (1 + 2*I_DELTA) + ceil(LAMBDA/2)*ceil(log2 M) +
// (1 + 2*I_MAX), the paper's latency for this architecture: 113 cycles for
// the defaults (I_DELTA = 3) and 167 for I_DELTA = I_MAX = 30.
//
// Interface: start_i (one cycle) samples syn_i and llr_i and starts a
// decoding, aborting any decoding in progress. done_o is a one-cycle pulse;
// success_o, ehat_o, pp_used_o and pp_index_o are valid in that cycle.
// pp_list_o shows the sorted unreliable checks once sorting is done.
// The selection rule between MP* results and the abort of the
// post-processing are this design's choices; the paper gives the structure
// (Fig. 1, case 2) and the latency formula.
//
// Lint notes: outputs of the sub-blocks that this controller does not need
// stay unconnected and are reported as unused: busy and iteration count of
// the decoders, delta values and strobe of the MP* decoders (only MP feeds
// the sorter), the sorted delta values, and the a posteriori LLRs inside the
// decoders. rst_n in the assertions' disable iff is reported as well.
module ca_dedicated
  import ca_pkg::*;
#(
  parameter int unsigned Z       = 63,
  parameter int unsigned LAMBDA  = 10,
  parameter int unsigned I_MAX   = 30,
  parameter int unsigned I_DELTA = 3,
  parameter int unsigned NMS_K   = 3,
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

  localparam int unsigned IW = $clog2(I_MAX + 1);

  logic          run, pp_started, pp_start, clear;
  logic          mp_busy, mp_fin, mp_ok;
  logic [N-1:0]  mp_ehat;
  logic [IW-1:0] mp_iter;
  rel_t          mp_delta [M];
  logic          mp_delta_stb;
  logic          srt_busy, srt_done;
  rel_t          srt_list_delta [LAMBDA];

  logic [LAMBDA-1:0] pp_fin, pp_ok, pp_busy;
  logic [N-1:0]      pp_ehat [LAMBDA];
  logic              any_pp_ok, all_pp_fin;
  logic [KW-1:0]     win;

  // The MP* decoders load the syndrome and prior later than MP does, so the
  // top keeps its own copy of them.
  logic [M-1:0] syn_i_r;
  msg_t         llr_r;

  assign clear = start_i | done_o;

  // ------------------------------------------------------------ initial MP
  nms_flooded_decoder #(
    .Z(Z), .I_MAX(I_MAX), .I_DELTA(I_DELTA), .NMS_K(NMS_K)
  ) u_mp (
    .clk        (clk),
    .rst_n      (rst_n),
    .start_i    (start_i),
    .abort_i    (done_o),
    .syn_i      (syn_i),
    .llr_i      (llr_i),
    .erase_i    ('0),
    .busy_o     (mp_busy),
    .fin_o      (mp_fin),
    .success_o  (mp_ok),
    .ehat_o     (mp_ehat),
    .iter_o     (mp_iter),
    .delta_o    (mp_delta),
    .delta_stb_o(mp_delta_stb)
  );

  // ---------------------------------------------------------- sorting unit
  cr_sorter #(.M(M), .LAMBDA(LAMBDA)) u_sort (
    .clk         (clk),
    .rst_n       (rst_n),
    .capture_i   (run & mp_delta_stb & ~clear),
    .abort_i     (clear),
    .delta_i     (mp_delta),
    .busy_o      (srt_busy),
    .done_o      (srt_done),
    .list_o      (pp_list_o),
    .list_delta_o(srt_list_delta)
  );

  assign pp_start = run & srt_done & ~pp_started & ~clear;

  // ------------------------------------------------------- MP* decoders
  for (genvar k = 0; k < LAMBDA; k++) begin : g_pp
    logic [N-1:0]  erase;
    logic [IW-1:0] iter;
    rel_t          delta [M];
    logic          stb;
    erasure_select #(.Z(Z)) u_era (
      .en_i   (1'b1),
      .ck_i   (pp_list_o[k]),
      .erase_o(erase)
    );
    nms_flooded_decoder #(
      .Z(Z), .I_MAX(I_MAX), .I_DELTA(I_DELTA), .NMS_K(NMS_K)
    ) u_mps (
      .clk        (clk),
      .rst_n      (rst_n),
      .start_i    (pp_start),
      .abort_i    (clear),
      .syn_i      (syn_i_r),
      .llr_i      (llr_r),
      .erase_i    (erase),
      .busy_o     (pp_busy[k]),
      .fin_o      (pp_fin[k]),
      .success_o  (pp_ok[k]),
      .ehat_o     (pp_ehat[k]),
      .iter_o     (iter),
      .delta_o    (delta),
      .delta_stb_o(stb)
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run        <= 1'b0;
      pp_started <= 1'b0;
      syn_i_r    <= '0;
      llr_r      <= '0;
    end else if (start_i) begin
      run        <= 1'b1;
      pp_started <= 1'b0;
      syn_i_r    <= syn_i;
      llr_r      <= llr_i;
    end else if (done_o) begin
      run        <= 1'b0;
      pp_started <= 1'b0;
    end else if (pp_start) begin
      pp_started <= 1'b1;
    end
  end

  // ------------------------------------------------------ output selection
  always_comb begin
    win = '0;
    for (int k = LAMBDA - 1; k >= 0; k--)
      if (pp_fin[k] && pp_ok[k]) win = KW'(k);
  end

  assign any_pp_ok  = pp_started & |(pp_fin & pp_ok);
  assign all_pp_fin = pp_started & (&pp_fin);

  always_comb begin
    done_o     = 1'b0;
    success_o  = 1'b0;
    pp_used_o  = 1'b0;
    pp_index_o = '0;
    ehat_o     = mp_ehat;
    if (run && mp_fin) begin
      if (mp_ok) begin
        done_o    = 1'b1;
        success_o = 1'b1;
      end else if (any_pp_ok) begin
        done_o     = 1'b1;
        success_o  = 1'b1;
        pp_used_o  = 1'b1;
        pp_index_o = win;
        ehat_o     = pp_ehat[win];
      end else if (all_pp_fin) begin
        done_o = 1'b1;
      end
    end
  end

  assign busy_o = run;

  // Handshake rules of the sub-blocks.
  assert property (@(posedge clk) disable iff (!rst_n) pp_start |-> !srt_busy);
  assert property (@(posedge clk) disable iff (!rst_n) done_o |-> run);

endmodule
