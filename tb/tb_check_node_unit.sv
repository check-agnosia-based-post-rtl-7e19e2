// tb_check_node_unit - self-checking test of the min-sum check-node unit.
//
// Drives random message sets (with extra weight on ties, zeros and the
// extreme values +-31) for both NMS normalizations used by the decoder
// (NMS_K = 3: 0.875, NMS_K = 4: 0.9375) and compares each output with the
// min-sum rule computed directly: minimum and sign product over the other
// edges, scaled by 1 - 2^-K and truncated. delta is compared with the sum of
// the two smallest incoming magnitudes.
module tb_check_node_unit;
  import ca_pkg::*;

  msg_t in [DC];
  logic syn;
  msg_t out3 [DC], out4 [DC];
  rel_t d3, d4;
  int   checks = 0, failures = 0;

  check_node_unit #(.NMS_K(3)) dut3 (.q2c_i(in), .syn_i(syn), .c2q_o(out3), .delta_o(d3));
  check_node_unit #(.NMS_K(4)) dut4 (.q2c_i(in), .syn_i(syn), .c2q_o(out4), .delta_o(d4));

  function automatic int expect_msg(int j, int k);
    int mn = 1000;
    bit sg = syn;
    for (int jj = 0; jj < DC; jj++) if (jj != j) begin
      int v = (in[jj] < 0) ? -int'(in[jj]) : int'(in[jj]);
      if (v < mn) mn = v;
      sg ^= (in[jj] < 0);
    end
    mn = mn - (mn >> k);
    return sg ? -mn : mn;
  endfunction

  function automatic int expect_delta();
    int v[DC];
    for (int j = 0; j < DC; j++) v[j] = (in[j] < 0) ? -int'(in[j]) : int'(in[j]);
    v.sort();
    return v[0] + v[1];
  endfunction

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      int mode;
      mode = $urandom_range(0, 3);
      for (int j = 0; j < DC; j++) begin
        int v;
        case (mode)
          0: v = int'($urandom_range(0, 62)) - 31;
          1: v = int'($urandom_range(0, 6)) - 3;
          2: v = ($urandom_range(0, 1) ? 31 : -31);
          default: v = (int'($urandom_range(0, 2)) - 1) * int'($urandom_range(10, 12));
        endcase
        in[j] = msg_t'(v);
      end
      syn = 1'($urandom_range(0, 1));
      #1;
      for (int j = 0; j < DC; j++) begin
        checks += 2;
        if (int'(out3[j]) != expect_msg(j, 3)) begin
          failures++;
          if (failures < 10) $display("K=3 t=%0d j=%0d got %0d exp %0d", t, j, out3[j], expect_msg(j, 3));
        end
        if (int'(out4[j]) != expect_msg(j, 4)) failures++;
      end
      checks += 2;
      if (int'(d3) != expect_delta()) begin
        failures++;
        if (failures < 10) $display("delta t=%0d got %0d exp %0d", t, d3, expect_delta());
      end
      if (int'(d4) != expect_delta()) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
