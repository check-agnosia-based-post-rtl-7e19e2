// tb_nms_flooded_decoder - self-checking test of the flooded NMS decoder.
//
// A reduced code (Z = 9: 63 checks x 126 qubits, same base structure, no
// 4-cycles) and I_MAX = 15, I_DELTA = 3. Random error patterns of several
// weights give the syndromes; about a third of the trials erase the support
// of a random check, as an MP* decoder does. The estimate, the success flag
// and the iteration count are compared with the reference model, the
// latency with 1 + 2 * iterations cycles, the captured reliabilities with
// the reference delta at iteration I_DELTA, and a successful estimate must
// reproduce the syndrome. Abort and restart are exercised too.
module tb_nms_flooded_decoder;
  import ca_pkg::*;
  import ca_ref_pkg::*;

  localparam int Z = 9, IMAX = 15, IDELTA = 3, K = 3, LLR = 12;
  localparam int N = NB * Z, M = MB * Z;
  localparam int IW = $clog2(IMAX + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, abort_r;
  logic [M-1:0] syn;
  logic [N-1:0] erase;
  msg_t llr;
  logic busy, fin, ok;
  logic [N-1:0] ehat;
  logic [IW-1:0] iter;
  rel_t delta [M];
  logic stb;
  rel_t cap [M];
  int   n_stb;
  int checks = 0, failures = 0;
  int n_ok = 0, n_fail = 0, n_erase = 0;

  nms_flooded_decoder #(.Z(Z), .I_MAX(IMAX), .I_DELTA(IDELTA), .NMS_K(K)) dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .abort_i(abort_r), .syn_i(syn),
    .llr_i(llr), .erase_i(erase), .busy_o(busy), .fin_o(fin), .success_o(ok),
    .ehat_o(ehat), .iter_o(iter), .delta_o(delta), .delta_stb_o(stb));

  always @(posedge clk) if (stb) begin
    cap <= delta;
    n_stb <= n_stb + 1;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic trial(int w, bit do_erase);
    bvec_t e = new[N];
    bvec_t s, er, eh, sh;
    ivec_t dref;
    bit rok;
    int rit, cyc;
    foreach (e[q]) e[q] = 0;
    for (int i = 0; i < w; i++) e[$urandom_range(0, N - 1)] = 1;
    s = syndrome(Z, e);
    if (do_erase) er = support(Z, $urandom_range(0, M - 1));
    else begin
      er = new[N];
      foreach (er[q]) er[q] = 0;
    end
    rit = nms_decode(Z, s, er, LLR, IMAX, IDELTA, K, eh, rok, dref);
    for (int c = 0; c < M; c++) syn[c] = s[c];
    for (int q = 0; q < N; q++) erase[q] = er[q];
    n_stb = 0;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    #1;
    cyc = 1;
    while (!fin && cyc < 200) begin @(posedge clk); #1; cyc++; end
    checks += 3;
    if (ok != rok) begin failures++; $display("success %0b exp %0b (w=%0d)", ok, rok, w); end
    if (int'(iter) != rit) begin failures++; $display("iter %0d exp %0d", iter, rit); end
    if (cyc != 1 + 2 * rit) begin failures++; $display("latency %0d exp %0d", cyc, 1 + 2 * rit); end
    for (int q = 0; q < N; q++) begin
      checks++;
      if (ehat[q] != eh[q]) failures++;
    end
    if (ok) begin
      bvec_t g;
      g = new[N];
      for (int q = 0; q < N; q++) g[q] = ehat[q];
      sh = syndrome(Z, g);
      checks++;
      foreach (sh[c]) if (sh[c] != s[c]) begin failures++; break; end
    end
    if (rit >= IDELTA) begin
      checks++;
      if (n_stb != 1) failures++;
      for (int c = 0; c < M; c++) begin
        checks++;
        if (int'(cap[c]) != dref[c]) failures++;
      end
    end
    if (rok) n_ok++; else n_fail++;
    if (do_erase) n_erase++;
    @(posedge clk);
  endtask

  initial begin
    start = 0; abort_r = 0; syn = '0; erase = '0; llr = msg_t'(LLR);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 150; t++) trial(1 + (t % 14), ($urandom_range(0, 2) == 0));
    // abort in the middle of a decoding
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    repeat (3) @(posedge clk);
    abort_r <= 1'b1; @(posedge clk); abort_r <= 1'b0;
    repeat (3) @(posedge clk);
    checks++;
    if (busy || fin) failures++;
    trial(3, 0);
    checks++;
    if (n_ok == 0 || n_fail == 0) begin
      failures++;
      $display("coverage: ok=%0d fail=%0d", n_ok, n_fail);
    end
    $display("decodings: %0d met the syndrome, %0d did not, %0d with erasure", n_ok, n_fail, n_erase);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
