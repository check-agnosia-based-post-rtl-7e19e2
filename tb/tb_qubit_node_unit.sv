// tb_qubit_node_unit - self-checking test of the qubit-node unit.
//
// Random priors (including 0, the erased case) and random check messages;
// the extrinsic outputs are compared with prior + sum of the other messages
// saturated to +-31, the a posteriori value with the full sum saturated to
// +-127, and the hard decision with the sign of that sum.
module tb_qubit_node_unit;
  import ca_pkg::*;

  msg_t gam;
  msg_t in [DV];
  msg_t out [DV];
  llr_t ap;
  logic hd;
  int   checks = 0, failures = 0;

  qubit_node_unit dut (.gamma_i(gam), .c2q_i(in), .q2c_o(out), .apost_o(ap), .hd_o(hd));

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      int g, v[DV], s;
      g = ($urandom_range(0, 3) == 0) ? 0 : int'($urandom_range(0, 62)) - 31;
      gam = msg_t'(g);
      s = g;
      for (int k = 0; k < DV; k++) begin
        v[k] = ($urandom_range(0, 1)) ? int'($urandom_range(0, 54)) - 27 : int'($urandom_range(0, 62)) - 31;
        in[k] = msg_t'(v[k]);
        s += v[k];
      end
      #1;
      for (int k = 0; k < DV; k++) begin
        int x;
        x = s - v[k];
        x = (x > 31) ? 31 : (x < -31) ? -31 : x;
        checks++;
        if (int'(out[k]) != x) begin
          failures++;
          if (failures < 10) $display("t=%0d k=%0d got %0d exp %0d", t, k, out[k], x);
        end
      end
      checks += 2;
      if (int'(ap) != ((s > 127) ? 127 : (s < -127) ? -127 : s)) failures++;
      if (hd != (s < 0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
