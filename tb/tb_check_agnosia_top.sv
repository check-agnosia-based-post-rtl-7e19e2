// tb_check_agnosia_top - end-to-end test of check_agnosia_top in both of
// its architectures, at a reduced size: Z = 9 (63 checks x 126 qubits),
// LAMBDA = 4.
//   dut0: HW_REUSE = 0 (dedicated hardware), I_MAX = 20, I_DELTA = 3
//   dut1: HW_REUSE = 1 (hardware reuse),     I_MAX = 10, I_DELTA = 10
// Both see the same random X-error syndromes (weight 1..18). Estimate,
// success, the MP* index, the sorted check list and the cycle of done are
// compared with the reference model of each architecture; a successful
// estimate must reproduce the syndrome. A restart in the middle of a
// decoding is exercised once.
//
// Every mechanism is counted and must occur at least once:
//   dedicated: MP success before the reliabilities are taken; MP success
//     after the MP* decoders started (post-processing abandoned); MP* win;
//     MP* success held until MP failed; several MP* successes (lowest k);
//     total failure.
//   reuse: success in the first MP* round; in a later round; total failure
//     with the worst-case latency; first round waiting for the sort.
module tb_check_agnosia_top;
  import ca_pkg::*;
  import ca_ref_pkg::*;

  localparam int Z = 9, LAMBDA = 4, K = 3, LLR = 12;
  localparam int IMAX0 = 20, IDELTA0 = 3, IMAX1 = 10, IDELTA1 = 10;
  localparam int N = NB * Z, M = MB * Z;
  localparam int KW = $clog2(LAMBDA);
  localparam int S = ((LAMBDA + 1) / 2) * 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start;
  logic [M-1:0] syn;
  msg_t llr;
  logic [1:0] busy, done, ok, pp_used;
  logic [N-1:0] ehat [2];
  logic [KW-1:0] pp_idx [2];
  logic [$clog2(M)-1:0] plist0 [LAMBDA];
  logic [$clog2(M)-1:0] plist1 [LAMBDA];
  int checks = 0, failures = 0;
  int n_mp_early = 0, n_mp_late = 0, n_pp_win = 0, n_pp_held = 0, n_pp_multi = 0, n_all_fail = 0;
  int n_first = 0, n_later = 0, n_seq_fail = 0, n_wait = 0;

  check_agnosia_top #(.HW_REUSE(1'b0), .Z(Z), .LAMBDA(LAMBDA), .I_MAX(IMAX0), .I_DELTA(IDELTA0),
                      .NMS_K(K)) dut0 (
    .clk(clk), .rst_n(rst_n), .start_i(start), .syn_i(syn), .llr_i(llr), .busy_o(busy[0]),
    .done_o(done[0]), .success_o(ok[0]), .ehat_o(ehat[0]), .pp_used_o(pp_used[0]),
    .pp_index_o(pp_idx[0]), .pp_list_o(plist0));
  check_agnosia_top #(.HW_REUSE(1'b1), .Z(Z), .LAMBDA(LAMBDA), .I_MAX(IMAX1), .I_DELTA(IDELTA1),
                      .NMS_K(K)) dut1 (
    .clk(clk), .rst_n(rst_n), .start_i(start), .syn_i(syn), .llr_i(llr), .busy_o(busy[1]),
    .done_o(done[1]), .success_o(ok[1]), .ehat_o(ehat[1]), .pp_used_o(pp_used[1]),
    .pp_index_o(pp_idx[1]), .pp_list_o(plist1));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic trial(int w);
    bvec_t e = new[N];
    bvec_t s;
    bvec_t eh [2];
    ivec_t lst [2];
    ca_result_t r [2];
    int cyc [2];
    int c;
    foreach (e[q]) e[q] = 0;
    for (int i = 0; i < w; i++) e[$urandom_range(0, N - 1)] = 1;
    s = syndrome(Z, e);
    r[0] = check_agnosia(Z, s, LLR, LAMBDA, IMAX0, IDELTA0, K, eh[0], lst[0]);
    r[1] = check_agnosia_seq(Z, s, LLR, LAMBDA, IMAX1, IDELTA1, K, eh[1], lst[1]);
    for (int i = 0; i < M; i++) syn[i] = s[i];
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    #1;
    c = 1;
    cyc[0] = 0;
    cyc[1] = 0;
    while ((cyc[0] == 0 || cyc[1] == 0) && c < 2000) begin
      for (int d = 0; d < 2; d++) if (done[d] && cyc[d] == 0) begin
        cyc[d] = c;
        checks += 3;
        if (ok[d] != r[d].ok) begin failures++; $display("dut%0d w=%0d success %0b exp %0b", d, w, ok[d], r[d].ok); end
        if (pp_used[d] != r[d].pp_used) begin failures++; $display("dut%0d pp_used %0b", d, pp_used[d]); end
        if (c != r[d].latency) begin failures++; $display("dut%0d w=%0d done at %0d exp %0d", d, w, c, r[d].latency); end
        if (r[d].pp_used) begin
          checks++;
          if (int'(pp_idx[d]) != r[d].pp_index) failures++;
        end
        for (int q = 0; q < N; q++) begin
          checks++;
          if (ehat[d][q] != eh[d][q]) failures++;
        end
        if (!r[d].mp_ok) for (int k = 0; k < LAMBDA; k++) begin
          checks++;
          if (int'(d == 0 ? plist0[k] : plist1[k]) != lst[d][k]) failures++;
        end
        if (ok[d]) begin
          bvec_t g, sh;
          g = new[N];
          for (int q = 0; q < N; q++) g[q] = ehat[d][q];
          sh = syndrome(Z, g);
          checks++;
          foreach (sh[i]) if (sh[i] != s[i]) begin failures++; break; end
        end
      end
      @(posedge clk);
      #1;
      c++;
    end
    if (cyc[0] == 0 || cyc[1] == 0) begin failures++; $display("no done"); end
    if (r[0].mp_ok && r[0].mp_iters < IDELTA0) n_mp_early++;
    if (r[0].mp_ok && r[0].pp_started) n_mp_late++;
    if (r[0].pp_used) n_pp_win++;
    if (!r[0].mp_ok && r[0].pp_early) n_pp_held++;
    if (!r[0].mp_ok && r[0].n_pp_ok > 1) n_pp_multi++;
    if (!r[0].ok) n_all_fail++;
    if (r[1].pp_used && r[1].pp_index == 0) n_first++;
    if (r[1].pp_used && r[1].pp_index > 0) n_later++;
    if (!r[1].ok && r[1].latency == (1 + 2 * IMAX1) + S + LAMBDA * (1 + 2 * IMAX1)) n_seq_fail++;
    if (!r[1].mp_ok && r[1].pp_early) n_wait++;
    @(posedge clk);
  endtask

  initial begin
    start = 0; syn = '0; llr = msg_t'(LLR);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 240; t++) trial(1 + (t % 18));
    // restart while busy: the second start aborts the first decoding
    syn = '1;
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    repeat (30) @(posedge clk);
    trial(2);
    $display("dedicated: mp_early=%0d mp_late=%0d pp_win=%0d pp_held=%0d pp_multi=%0d all_fail=%0d",
             n_mp_early, n_mp_late, n_pp_win, n_pp_held, n_pp_multi, n_all_fail);
    $display("reuse: first_round=%0d later_round=%0d worst_case_fail=%0d wait_sort=%0d",
             n_first, n_later, n_seq_fail, n_wait);
    checks += 10;
    if (n_mp_early == 0) failures++;
    if (n_mp_late  == 0) failures++;
    if (n_pp_win   == 0) failures++;
    if (n_pp_held  == 0) failures++;
    if (n_pp_multi == 0) failures++;
    if (n_all_fail == 0) failures++;
    if (n_first    == 0) failures++;
    if (n_later    == 0) failures++;
    if (n_seq_fail == 0) failures++;
    if (n_wait     == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
