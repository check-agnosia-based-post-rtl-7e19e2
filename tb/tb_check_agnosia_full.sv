// tb_check_agnosia_full - the check-agnosia decoder at its default size:
// 441 checks x 882 qubits, LAMBDA = 10, I_MAX = 30, I_DELTA = 3, NMS
// factor 0.875, LLR_init = 12 (the paper's flooded configuration). The top
// is instantiated without parameter overrides.
//
// Random X-error patterns of weight 10..120 give the syndromes.
// For each decoding the reference model (Algorithm 2 with the
// dedicated-hardware timing) gives the expected estimate, success flag,
// winning MP* index, sorted check list and the cycle of done; the estimate of
// every successful decoding must also reproduce the syndrome. A restart in
// the middle of a decoding is exercised once. The worst-case latency of
// 113 cycles (7 + 45 + 61) must be observed when post-processing fails.
//
// The mechanisms are counted and reported; only the ones that random errors
// of these weights reach reliably (MP success, MP failure followed by
// post-processing) are required here, the reduced-size test covers all:
//   mp_early    MP meets the syndrome before the reliabilities are taken
//   mp_late     MP meets the syndrome after the MP* decoders were started
//               (post-processing abandoned)
//   pp_win      MP fails and an MP* decoder meets the syndrome
//   pp_held     an MP* succeeded before MP had failed (result held)
//   pp_multi    several MP* decoders met the syndrome (lowest k chosen)
//   all_fail    MP and every MP* fail
module tb_check_agnosia_full;
  import ca_pkg::*;
  import ca_ref_pkg::*;

  localparam int Z = 63, LAMBDA = 10, IMAX = 30, IDELTA = 3, K = 3, LLR = 12;
  localparam int N = NB * Z, M = MB * Z;
  localparam int KW = $clog2(LAMBDA);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start;
  logic [M-1:0] syn;
  msg_t llr;
  logic busy, done, ok, pp_used;
  logic [N-1:0] ehat;
  logic [KW-1:0] pp_idx;
  logic [$clog2(M)-1:0] plist [LAMBDA];
  int checks = 0, failures = 0;
  int n_worst = 0;
  int n_mp_early = 0, n_mp_late = 0, n_pp_win = 0, n_pp_held = 0, n_pp_multi = 0, n_all_fail = 0;

  check_agnosia_top dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .syn_i(syn), .llr_i(llr), .busy_o(busy),
    .done_o(done), .success_o(ok), .ehat_o(ehat), .pp_used_o(pp_used), .pp_index_o(pp_idx),
    .pp_list_o(plist));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic trial(int w);
    bvec_t e = new[N];
    bvec_t s, eh;
    ivec_t lst;
    ca_result_t r;
    int cyc;
    foreach (e[q]) e[q] = 0;
    for (int i = 0; i < w; i++) e[$urandom_range(0, N - 1)] = 1;
    s = syndrome(Z, e);
    r = check_agnosia(Z, s, LLR, LAMBDA, IMAX, IDELTA, K, eh, lst);
    for (int c = 0; c < M; c++) syn[c] = s[c];
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    #1;
    cyc = 1;
    while (!done && cyc < 1000) begin @(posedge clk); #1; cyc++; end
    checks += 3;
    if (ok != r.ok) begin failures++; $display("w=%0d success %0b exp %0b", w, ok, r.ok); end
    if (cyc != r.latency) begin failures++; $display("w=%0d done at %0d exp %0d", w, cyc, r.latency); end
    if (pp_used != r.pp_used) begin failures++; $display("w=%0d pp_used %0b exp %0b", w, pp_used, r.pp_used); end
    if (r.pp_used) begin
      checks++;
      if (int'(pp_idx) != r.pp_index) begin failures++; $display("pp_index %0d exp %0d", pp_idx, r.pp_index); end
    end
    if (!r.mp_ok) for (int k = 0; k < LAMBDA; k++) begin
      checks++;
      if (int'(plist[k]) != lst[k]) begin failures++; $display("list[%0d] %0d exp %0d", k, plist[k], lst[k]); end
    end
    for (int q = 0; q < N; q++) begin
      checks++;
      if (ehat[q] != eh[q]) failures++;
    end
    if (ok) begin
      bvec_t g, sh;
      g = new[N];
      for (int q = 0; q < N; q++) g[q] = ehat[q];
      sh = syndrome(Z, g);
      checks++;
      foreach (sh[c]) if (sh[c] != s[c]) begin failures++; break; end
    end
    if (r.mp_ok && r.mp_iters < IDELTA) n_mp_early++;
    if (r.mp_ok && r.pp_started) n_mp_late++;
    if (r.pp_used) n_pp_win++;
    if (!r.mp_ok && r.pp_early) n_pp_held++;
    if (!r.mp_ok && r.n_pp_ok > 1) n_pp_multi++;
    if (!r.ok) n_all_fail++;
    if (cyc == 113) n_worst++;
    @(posedge clk);
  endtask

  initial begin
    start = 0; syn = '0; llr = msg_t'(LLR);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 24; t++) trial(10 + 5 * (t % 23));
    // restart while busy: the second start aborts the first decoding
    syn = '1;
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    repeat (30) @(posedge clk);
    trial(2);
    $display("worst_case_113=%0d mp_early=%0d mp_late=%0d pp_win=%0d pp_held=%0d pp_multi=%0d all_fail=%0d",
             n_worst, n_mp_early, n_mp_late, n_pp_win, n_pp_held, n_pp_multi, n_all_fail);
    checks += 3;
    if (n_mp_early + n_mp_late == 0) failures++;
    if (n_pp_win + n_all_fail == 0) failures++;
    if (n_worst == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
