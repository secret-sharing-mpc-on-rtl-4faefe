// tb_mpc_xor: shares two random secret vectors among three parties, runs
// each party's XOR unit, and checks that the outputs reconstruct to v ^ w and
// keep the sharing invariant.
module tb_mpc_xor;
  import mpc_pkg::*;
  import tb_mpc_pkg::*;

  share_t in0[3], in1[3], out[3];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 3; i++) begin : g_p
    mpc_xor dut (.in0(in0[i]), .in1(in1[i]), .out(out[i]));
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t v, w;
    share_t s0[3], s1[3], o[3];
    for (int t = 0; t < 50; t++) begin
      v = rand_vec(); w = rand_vec();
      share(v, s0); share(w, s1);
      for (int i = 0; i < 3; i++) begin in0[i] = s0[i]; in1[i] = s1[i]; end
      #1;
      for (int i = 0; i < 3; i++) o[i] = out[i];
      checks++;
      if (reconstruct(o) != (v ^ w)) begin failures++; $display("FAIL: value %0d", t); end
      checks++;
      if (!well_formed(o, v ^ w)) begin failures++; $display("FAIL: sharing %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
