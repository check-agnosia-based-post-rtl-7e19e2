// tb_cr_sorter - self-checking test of the sorting unit.
//
// Two instances: the default size (441 checks, lambda = 10, expected
// ceil(10/2) * ceil(log2 441) = 45 cycles) and a small one with an odd lambda
// (20 checks, lambda = 5: 3 passes of 5 cycles = 15 cycles). Each trial loads
// random reliabilities (narrow ranges give many ties), then compares the
// list with a selection sort (increasing value, ties by index) and checks
// the number of cycles from capture to done. An abort in the middle of a
// sort, and a sort after it, are also exercised.
module tb_cr_sorter;
  import ca_pkg::*;
  import ca_ref_pkg::*;

  localparam int MA = 441, LA = 10;
  localparam int MB2 = 20, LB = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cap_a, cap_b, ab_a, ab_b;
  rel_t da [MA];
  rel_t db [MB2];
  logic busy_a, done_a, busy_b, done_b;
  logic [$clog2(MA)-1:0]  la [LA];
  logic [$clog2(MB2)-1:0] lb [LB];
  rel_t lda [LA];
  rel_t ldb [LB];
  int checks = 0, failures = 0;

  cr_sorter #(.M(MA), .LAMBDA(LA)) dut_a (
    .clk(clk), .rst_n(rst_n), .capture_i(cap_a), .abort_i(ab_a), .delta_i(da),
    .busy_o(busy_a), .done_o(done_a), .list_o(la), .list_delta_o(lda));
  cr_sorter #(.M(MB2), .LAMBDA(LB)) dut_b (
    .clk(clk), .rst_n(rst_n), .capture_i(cap_b), .abort_i(ab_b), .delta_i(db),
    .busy_o(busy_b), .done_o(done_b), .list_o(lb), .list_delta_o(ldb));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_a(int range);
    ivec_t v = new[MA];
    ivec_t r;
    int cyc = 0;
    foreach (v[i]) begin
      v[i] = $urandom_range(0, range);
      da[i] = rel_t'(v[i]);
    end
    r = least(v, LA);
    cap_a <= 1'b1;
    @(posedge clk);
    cap_a <= 1'b0;
    do begin @(posedge clk); #1; cyc++; end while (!done_a && cyc < 1000);
    checks++;
    if (cyc != ((LA + 1) / 2) * clog2(MA)) begin
      failures++;
      $display("A: %0d cycles, expected %0d", cyc, ((LA + 1) / 2) * clog2(MA));
    end
    for (int k = 0; k < LA; k++) begin
      checks += 2;
      if (int'(la[k]) != r[k]) begin
        failures++;
        if (failures < 10) $display("A: list[%0d] = %0d, expected %0d", k, la[k], r[k]);
      end
      if (int'(lda[k]) != v[r[k]]) failures++;
    end
  endtask

  task automatic run_b(int range);
    ivec_t v = new[MB2];
    ivec_t r;
    int cyc = 0;
    foreach (v[i]) begin
      v[i] = $urandom_range(0, range);
      db[i] = rel_t'(v[i]);
    end
    r = least(v, LB);
    cap_b <= 1'b1;
    @(posedge clk);
    cap_b <= 1'b0;
    do begin @(posedge clk); #1; cyc++; end while (!done_b && cyc < 1000);
    checks++;
    if (cyc != ((LB + 1) / 2) * clog2(MB2)) failures++;
    for (int k = 0; k < LB; k++) begin
      checks++;
      if (int'(lb[k]) != r[k]) begin
        failures++;
        if (failures < 10) $display("B: list[%0d] = %0d, expected %0d", k, lb[k], r[k]);
      end
    end
  endtask

  initial begin
    cap_a = 0; cap_b = 0; ab_a = 0; ab_b = 0;
    foreach (da[i]) da[i] = '0;
    foreach (db[i]) db[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < 30; t++) begin
      run_a((t % 3 == 0) ? 3 : 62);
      run_b((t % 2 == 0) ? 2 : 62);
    end
    // abort while sorting: unit returns to idle, done stays low
    cap_a <= 1'b1; @(posedge clk); cap_a <= 1'b0;
    repeat (5) @(posedge clk);
    ab_a <= 1'b1; @(posedge clk); ab_a <= 1'b0;
    repeat (60) @(posedge clk);
    checks += 2;
    if (done_a || busy_a) failures++;
    // restart after abort still sorts correctly
    run_a(62);
    if (!done_a) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
