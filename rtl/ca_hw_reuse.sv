// ca_hw_reuse - check-agnosia decoder for a CSS quantum LDPC code,
// hardware-reuse (sequential post-processing) architecture, Fig. 1 case 1
// of the paper.
//
// One flooded NMS decoder does all the work. It first runs the initial MP
// decoding; the sorting unit captures the check reliabilities at iteration
// I_DELTA. If MP fails, the same decoder runs up to LAMBDA MP* rounds, round
// k with the prior reliability of the support of the k-th least reliable
// check set to zero (the |Q| multiplexers of the paper, driven by
// erasure_select). Following Algorithm 2, the first round that meets the
// syndrome ends the decoding; if none does, success_o = 0 and ehat_o holds the
// last round's estimate.
//
// Timing, with start_i in cycle 0 and done_o in cycle T: MP alone gives
// T = 1 + 2i; otherwise the first round is loaded in cycle
// max(1 + 2*I_MAX, 1 + 2*I_DELTA + S), with S = ceil(LAMBDA/2)*ceil(log2 M)
// sorting cycles, and each round of j iterations adds 1 + 2j cycles. With
// I_DELTA = I_MAX (the paper's setting for this architecture) the worst case
// is the paper's (1 + 2*I_MAX) + S + LAMBDA*(1 + 2*I_MAX): 716 cycles for
// the default code, LAMBDA = 10, I_MAX = 30.
//
// Interface: as check_agnosia_top; pp_index_o is the round that succeeded.
// The next round is loaded in the cycle the previous one reports its result,
// so no cycle is lost between rounds; this and the failure output are this
// design's choices.
//
// Lint notes: the decoder's busy and iteration outputs, the sorter's busy
// and delta-list outputs, and the a posteriori LLRs inside the decoder are
// not needed here and are reported as unused; rst_n in the assertions'
// disable iff is reported as well.
module ca_hw_reuse
  import ca_pkg::*;
#(
  parameter int unsigned Z       = 63,
  parameter int unsigned LAMBDA  = 10,
  parameter int unsigned I_MAX   = 30,
  parameter int unsigned I_DELTA = 30,
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

  localparam int unsigned IW  = $clog2(I_MAX + 1);
  localparam int unsigned KNW = $clog2(LAMBDA + 1);

  typedef enum logic [1:0] {S_IDLE, S_MP, S_WSORT, S_PP} state_t;

  state_t         state;
  logic [M-1:0]   syn_r;
  msg_t           llr_r;
  logic [KNW-1:0] kn;        // next round to start
  logic [KW-1:0]  krun;      // round running
  logic           clear, round_start;
  logic           dec_start, dec_busy, dec_fin, dec_ok, dec_stb;
  logic [N-1:0]   dec_erase, era;
  logic [M-1:0]   dec_syn;
  msg_t           dec_llr;
  logic [IW-1:0]  dec_iter;
  rel_t           dec_delta [M];
  logic           srt_busy, srt_done;
  rel_t           srt_list_delta [LAMBDA];
  logic [CIW-1:0] ck;

  assign clear = start_i | done_o;

  assign ck = pp_list_o[KW'(kn)];

  erasure_select #(.Z(Z)) u_era (
    .en_i   (1'b1),
    .ck_i   (ck),
    .erase_o(era)
  );

  assign dec_start = start_i | round_start;
  assign dec_syn   = start_i ? syn_i : syn_r;
  assign dec_llr   = start_i ? llr_i : llr_r;
  assign dec_erase = start_i ? '0 : era;

  nms_flooded_decoder #(
    .Z(Z), .I_MAX(I_MAX), .I_DELTA(I_DELTA), .NMS_K(NMS_K)
  ) u_dec (
    .clk        (clk),
    .rst_n      (rst_n),
    .start_i    (dec_start),
    .abort_i    (done_o),
    .syn_i      (dec_syn),
    .llr_i      (dec_llr),
    .erase_i    (dec_erase),
    .busy_o     (dec_busy),
    .fin_o      (dec_fin),
    .success_o  (dec_ok),
    .ehat_o     (ehat_o),
    .iter_o     (dec_iter),
    .delta_o    (dec_delta),
    .delta_stb_o(dec_stb)
  );

  cr_sorter #(.M(M), .LAMBDA(LAMBDA)) u_sort (
    .clk         (clk),
    .rst_n       (rst_n),
    .capture_i   ((state == S_MP) & dec_stb & ~clear),
    .abort_i     (clear),
    .delta_i     (dec_delta),
    .busy_o      (srt_busy),
    .done_o      (srt_done),
    .list_o      (pp_list_o),
    .list_delta_o(srt_list_delta)
  );

  // Decisions of the cycle: finish, or load the next MP* round.
  always_comb begin
    done_o      = 1'b0;
    success_o   = 1'b0;
    round_start = 1'b0;
    unique case (state)
      S_MP: if (dec_fin) begin
        if (dec_ok) begin
          done_o    = 1'b1;
          success_o = 1'b1;
        end else if (srt_done) begin
          round_start = 1'b1;
        end
      end
      S_WSORT: round_start = srt_done;
      S_PP: if (dec_fin) begin
        if (dec_ok) begin
          done_o    = 1'b1;
          success_o = 1'b1;
        end else if (kn == KNW'(LAMBDA)) begin
          done_o = 1'b1;
        end else begin
          round_start = 1'b1;
        end
      end
      default: ;
    endcase
    if (start_i) begin
      done_o      = 1'b0;
      success_o   = 1'b0;
      round_start = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      syn_r <= '0;
      llr_r <= '0;
      kn    <= '0;
      krun  <= '0;
    end else if (start_i) begin
      state <= S_MP;
      syn_r <= syn_i;
      llr_r <= llr_i;
      kn    <= '0;
      krun  <= '0;
    end else if (done_o) begin
      state <= S_IDLE;
    end else begin
      if (round_start) begin
        state <= S_PP;
        krun  <= KW'(kn);
        kn    <= kn + 1'b1;
      end else if (state == S_MP && dec_fin) begin
        state <= S_WSORT;
      end
    end
  end

  assign busy_o     = (state != S_IDLE);
  assign pp_used_o  = (state == S_PP) & success_o;
  assign pp_index_o = krun;

  assert property (@(posedge clk) disable iff (!rst_n) round_start |-> srt_done);
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_PP) |-> kn != '0);

endmodule
