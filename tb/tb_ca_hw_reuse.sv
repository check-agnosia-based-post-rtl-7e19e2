// tb_ca_hw_reuse - test of the hardware-reuse check-agnosia core at a
// reduced size: Z = 9 (63 checks x 126 qubits), LAMBDA = 4, I_MAX = 10.
//
// Two instances see the same syndromes: one with I_DELTA = I_MAX (the
// paper's setting: sorting starts when MP has failed, so the first MP* round
// waits for it) and one with I_DELTA = 3 (sorting finishes while MP still
// runs). Estimate, success, round index, sorted list and the done cycle are
// compared with the sequential reference model; a successful estimate must
// reproduce the syndrome. Counted, and required at least once: MP success,
// success in the first round, success in a later round, total failure with
// the worst-case latency, and a round waiting for the sort.
module tb_ca_hw_reuse;
  import ca_pkg::*;
  import ca_ref_pkg::*;

  localparam int Z = 9, LAMBDA = 4, IMAX = 10, K = 3, LLR = 12;
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
  int n_mp = 0, n_first = 0, n_later = 0, n_fail = 0, n_wait = 0;

  ca_hw_reuse #(.Z(Z), .LAMBDA(LAMBDA), .I_MAX(IMAX), .I_DELTA(IMAX), .NMS_K(K)) dut0 (
    .clk(clk), .rst_n(rst_n), .start_i(start), .syn_i(syn), .llr_i(llr), .busy_o(busy[0]),
    .done_o(done[0]), .success_o(ok[0]), .ehat_o(ehat[0]), .pp_used_o(pp_used[0]),
    .pp_index_o(pp_idx[0]), .pp_list_o(plist0));
  ca_hw_reuse #(.Z(Z), .LAMBDA(LAMBDA), .I_MAX(IMAX), .I_DELTA(3), .NMS_K(K)) dut1 (
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
    r[0] = check_agnosia_seq(Z, s, LLR, LAMBDA, IMAX, IMAX, K, eh[0], lst[0]);
    r[1] = check_agnosia_seq(Z, s, LLR, LAMBDA, IMAX, 3, K, eh[1], lst[1]);
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
          if ((d == 0 ? int'(plist0[k]) : int'(plist1[k])) != lst[d][k]) failures++;
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
    if (r[0].mp_ok) n_mp++;
    if (r[0].pp_used && r[0].pp_index == 0) n_first++;
    if (r[0].pp_used && r[0].pp_index > 0) n_later++;
    if (!r[0].ok && r[0].latency == (1 + 2 * IMAX) + S + LAMBDA * (1 + 2 * IMAX)) n_fail++;
    if (!r[0].mp_ok && r[0].pp_early) n_wait++;
    @(posedge clk);
  endtask

  initial begin
    start = 0; syn = '0; llr = msg_t'(LLR);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 200; t++) trial(1 + (t % 18));
    $display("mp=%0d first_round=%0d later_round=%0d worst_case_fail=%0d wait_sort=%0d",
             n_mp, n_first, n_later, n_fail, n_wait);
    checks += 5;
    if (n_mp == 0) failures++;
    if (n_first == 0) failures++;
    if (n_later == 0) failures++;
    if (n_fail == 0) failures++;
    if (n_wait == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
