// tb_counter_buffer: six counters, random spike pattern; each counter must
// read 0 after reset, count up by one per round, restart at zero after a
// spike and stop at its maximum value (4-bit counters).
module tb_counter_buffer;
  localparam int N = 6, CB = 4;
  logic clk = 0, rst = 1, counter_reset;
  logic [CB-1:0] c_out;
  int checks = 0, failures = 0, resets = 0, sats = 0;
  int model [N];

  counter_buffer #(.N(N), .CB(CB)) dut (.clk, .rst, .counter_reset, .c_out);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    counter_reset = 0;
    foreach (model[j]) model[j] = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < 600; t++) begin
      automatic int s = t % N;
      // slot 5 never fires, so it saturates
      counter_reset = (s != 5) && (($urandom % 7) == 0);
      #1;
      checks++;
      if (int'(c_out) != model[s]) begin failures++; $display("t=%0d slot %0d exp %0d got %0d", t, s, model[s], c_out); end
      if (counter_reset) begin model[s] = 0; resets++; end
      else if (model[s] == (1 << CB) - 1) sats++;
      else model[s]++;
      @(posedge clk); #1;
    end
    checks++; if (resets == 0 || sats == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
