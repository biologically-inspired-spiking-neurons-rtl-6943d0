// tb_u_pipeline: random v, u into two U pipelines (7 stages with dt = 2^-14,
// 5 stages with dt = 2^-2); results are compared with the reference recovery
// step exactly U_S clocks later.
module tb_u_pipeline;
  import pwl_pkg::*;
  import snn_ref_pkg::*;
  logic clk = 0;
  fx_t v_in, u_in, uo7, uo5;
  int checks = 0, failures = 0;
  longint e7 [$], e5 [$];

  u_pipeline #(.U_S(7))                 d7 (.clk, .v_in, .u_in, .u_out(uo7));
  u_pipeline #(.U_S(5), .DT_SHIFT(2))   d5 (.clk, .v_in, .u_in, .u_out(uo5));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      v_in = fx_t'(-368640 + int'($urandom % 532480));
      u_in = fx_t'(-163840 + int'($urandom % 327680));
      e7.push_back(u_next(v_in, u_in, 14));
      e5.push_back(u_next(v_in, u_in, 2));
      @(posedge clk); #1;
      if (t >= 6) begin checks++; if (longint'(uo7) != e7[t-6]) begin failures++; $display("U7 t=%0d exp %0d got %0d", t, e7[t-6], uo7); end end
      if (t >= 4) begin checks++; if (longint'(uo5) != e5[t-4]) begin failures++; $display("U5 t=%0d exp %0d got %0d", t, e5[t-4], uo5); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
