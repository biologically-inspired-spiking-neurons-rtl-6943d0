// tb_weights_bank: a 4-input, 3-neuron bank with 8-bit weights. Random
// pattern bits and weight changes are applied; each output weight must equal
// the stored weight (0 after reset) plus +W_change for C = 1 or -W_change for
// C = 0, saturated, and must be what comes back N clocks later.
module tb_weights_bank;
  localparam int M = 4, N = 3, WB = 8;
  logic clk = 0, rst = 1;
  logic [M-1:0] c_in;
  logic signed [WB-1:0] wpos, wneg;
  logic signed [WB-1:0] w_out [M];
  int checks = 0, failures = 0, sats = 0, negs = 0;
  int model [N][M];

  weights_bank #(.M(M), .N(N), .WB(WB)) dut (.clk, .rst, .c_in, .wchg_pos(wpos), .wchg_neg(wneg), .w_out);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < N; j++) for (int k = 0; k < M; k++) model[j][k] = 0;
    c_in = '0; wpos = '0; wneg = '0;
    @(posedge clk); #1 rst = 0;
    for (int t = 0; t < 900; t++) begin
      automatic int s = t % N;
      automatic int ch = ($urandom % 3 == 0) ? int'($urandom % 61) - 30 : 0;
      c_in = M'($urandom);
      wpos = WB'(ch); wneg = WB'(-ch);
      #1;
      for (int k = 0; k < M; k++) begin
        automatic int e = model[s][k] + (c_in[k] ? ch : -ch);
        if (e > 127) begin e = 127; sats++; end
        if (e < -128) begin e = -128; sats++; end
        if (e < 0) negs++;
        model[s][k] = e;
        checks++;
        if (int'(w_out[k]) != e) begin failures++; if (failures < 10) $display("t=%0d s=%0d k=%0d exp %0d got %0d", t, s, k, e, w_out[k]); end
      end
      @(posedge clk); #1;
    end
    checks++; if (sats == 0 || negs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
