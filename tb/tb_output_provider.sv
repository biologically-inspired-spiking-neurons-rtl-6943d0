// tb_output_provider: the output register must take vo exactly in the clocks
// where update is 1 and hold its value otherwise.
module tb_output_provider;
  logic clk = 0, rst = 1, update;
  logic [19:0] vo, v_out, expect_v;
  int checks = 0, failures = 0, loads = 0;

  output_provider #(.VB(20)) dut (.clk, .rst, .update, .vo, .v_out);
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    update = 0; vo = '0;
    @(posedge clk); #1 rst = 0; expect_v = '0;
    for (int t = 0; t < 300; t++) begin
      update = ($urandom % 4) == 0;
      vo = 20'($urandom);
      @(posedge clk); #1;
      if (update) begin expect_v = vo; loads++; end
      checks++;
      if (v_out !== expect_v) begin failures++; $display("t=%0d exp %h got %h", t, expect_v, v_out); end
    end
    checks++; if (loads == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
