// tb_v_pipeline: drives random potentials, recovery values and currents into
// the V pipeline of all three models (dt = 2^-14 and a coarse dt = 2^-3) and
// compares each result, V_S clocks later (5, 6, 7), with the reference step.
module tb_v_pipeline;
  import pwl_pkg::*;
  import snn_ref_pkg::*;
  logic clk = 0;
  fx_t v_in, u_in, i_in;
  fx_t vo2, vo3, vo4, vo4c;
  int checks = 0, failures = 0;
  longint exp2 [$], exp3 [$], exp4 [$], exp4c [$];

  v_pipeline #(.MODEL(PWL2))                 d2  (.clk, .v_in, .u_in, .i_in, .v_out(vo2));
  v_pipeline #(.MODEL(PWL3))                 d3  (.clk, .v_in, .u_in, .i_in, .v_out(vo3));
  v_pipeline #(.MODEL(PWL4))                 d4  (.clk, .v_in, .u_in, .i_in, .v_out(vo4));
  v_pipeline #(.MODEL(PWL4), .DT_SHIFT(3))   d4c (.clk, .v_in, .u_in, .i_in, .v_out(vo4c));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(string nm, fx_t got, longint e);
    checks++;
    if (longint'(got) != e) begin
      failures++;
      if (failures < 10) $display("%s: expected %0d got %0d", nm, e, longint'(got));
    end
  endtask

  initial begin
    for (int t = 0; t < 400; t++) begin
      // v in [-90, 40] mV, u in [-40, 40], I in [-60, 60]
      v_in = fx_t'(-368640 + int'($urandom % 532480));
      u_in = fx_t'(-163840 + int'($urandom % 327680));
      i_in = fx_t'(-245760 + int'($urandom % 491520));
      if (t % 50 == 7) v_in = fx_t'(-256000);           // x = 0 exactly
      exp2.push_back(v_next(0, v_in, u_in, i_in, 14));
      exp3.push_back(v_next(1, v_in, u_in, i_in, 14));
      exp4.push_back(v_next(2, v_in, u_in, i_in, 14));
      exp4c.push_back(v_next(2, v_in, u_in, i_in, 3));
      @(posedge clk); #1;
      if (t >= 4) cmp("PWL2", vo2, exp2[t-4]);     // registered output: V_S-1 after this edge
      if (t >= 5) cmp("PWL3", vo3, exp3[t-5]);
      if (t >= 6) cmp("PWL4", vo4, exp4[t-6]);
      if (t >= 6) cmp("PWL4c", vo4c, exp4c[t-6]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
