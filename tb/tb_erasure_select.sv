// tb_erasure_select - self-checking test of the check-support decoder.
//
// For every check of the default 441 x 882 matrix, the mask is compared
// with the support obtained from the check's own edge list (the opposite
// direction of the lookup the block uses). With the enable low the mask
// must be empty.
module tb_erasure_select;
  import ca_pkg::*;
  import ca_ref_pkg::*;

  localparam int Z = 63;
  localparam int N = NB * Z;
  localparam int M = MB * Z;

  logic                 en;
  logic [$clog2(M)-1:0] ck;
  logic [N-1:0]         mask;
  int checks = 0, failures = 0;

  erasure_select #(.Z(Z)) dut (.en_i(en), .ck_i(ck), .erase_o(mask));

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < M; c++) begin
      bvec_t sup;
      sup = support(Z, c);
      en = 1'b1;
      ck = ($clog2(M))'(c);
      #1;
      for (int q = 0; q < N; q++) begin
        checks++;
        if (mask[q] != sup[q]) begin
          failures++;
          if (failures < 10) $display("check %0d qubit %0d got %0b", c, q, mask[q]);
        end
      end
      en = 1'b0;
      #1;
      checks++;
      if (mask != '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
