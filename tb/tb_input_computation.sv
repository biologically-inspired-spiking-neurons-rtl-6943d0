// tb_input_computation: 5 inputs (a tree with an unused leg), 8-bit weights,
// 2 delay stages. The current must be sum(C ? w : -w) + i_bias, saturated to
// 10 bits, and appear exactly I_S + D_S = 5 + 2 clocks after its inputs.
module tb_input_computation;
  localparam int M = 5, WB = 8, IIB = 10, DS = 2, LAT = 7;
  localparam int BIAS = 300;
  logic clk = 0;
  logic [M-1:0] c_in;
  logic signed [WB-1:0] w_in [M];
  logic signed [IIB-1:0] i_in;
  int checks = 0, failures = 0, sats = 0;
  int expq [$];

  input_computation #(.M(M), .WB(WB), .IIB(IIB), .D_S(DS), .I_BIAS(20'(BIAS))) dut (.clk, .c_in, .w_in, .i_in);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      automatic int s = BIAS;
      automatic bit big = (t % 10 == 3);
      c_in = M'($urandom);
      for (int k = 0; k < M; k++) begin
        w_in[k] = big ? WB'(c_in[k] ? 127 : -128) : WB'($urandom);
        s += c_in[k] ? int'(w_in[k]) : -int'(w_in[k]);
      end
      if (s > 511) begin s = 511; end
      if (s < -512) begin s = -512; end
      expq.push_back(s);
      @(posedge clk); #1;
      if (t >= LAT - 1) begin
        checks++;
        if (int'(i_in) != expq[t-LAT+1]) begin failures++; if (failures < 10) $display("t=%0d exp %0d got %0d", t, expq[t-LAT+1], i_in); end
        if (int'(i_in) == 511) sats++;
      end
    end
    checks++; if (sats == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
