// tb_learning_mechanism: loads a target word, lets it rotate, and checks the
// weight change for random counter values and spikes against
// dW = ((C_out - period(tN)) >>> ALPHA), its negation, the zero output
// without a spike or with training disabled, and saturation.
module tb_learning_mechanism;
  localparam int N = 5, CB = 12, WB = 6, ALPHA = 2, HI = 1000, LO = 100;
  logic clk = 0, rst = 1, valid, train_en, firing, t_n;
  logic [N-1:0] target;
  logic [CB-1:0] c_out;
  logic signed [WB-1:0] wpos, wneg;
  int checks = 0, failures = 0, sat_hits = 0, neg_changes = 0, pos_changes = 0;

  learning_mechanism #(.N(N), .CB(CB), .WB(WB), .ALPHA(ALPHA), .HIGH_PERIOD(HI), .LOW_PERIOD(LO))
    dut (.clk, .rst, .valid, .target, .train_en, .c_out, .firing, .t_n,
         .wchg_pos(wpos), .wchg_neg(wneg));
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, k;
    logic [N-1:0] tw;
    valid = 0; train_en = 0; firing = 0; c_out = '0; target = '0;
    @(posedge clk); #1 rst = 0;
    for (int rep = 0; rep < 4; rep++) begin
      tw = N'($urandom);
      target = tw; valid = 1;
      @(posedge clk); #1 valid = 0;
      for (int t = 0; t < 200; t++) begin
        k = t % N;
        train_en = ($urandom % 5) != 0;
        firing   = ($urandom % 2) != 0;
        c_out    = CB'($urandom % 1400);
        #1;
        checks++;
        if (t_n !== tw[k]) begin failures++; $display("tN slot %0d", k); end
        e = (int'(c_out) - (tw[k] ? LO : HI)) >>> ALPHA;
        if (e > 31) begin e = 31; sat_hits++; end
        if (e < -32) begin e = -32; sat_hits++; end
        if (!(firing && train_en)) e = 0;
        if (e > 0) pos_changes++;
        if (e < 0) neg_changes++;
        checks++;
        if (int'(wpos) != e) begin failures++; $display("t=%0d wpos exp %0d got %0d", t, e, wpos); end
        checks++;
        if (WB'(wneg + wpos) != 0) begin failures++; $display("wneg %0d", wneg); end
        @(posedge clk); #1;
      end
    end
    checks++; if (sat_hits == 0 || pos_changes == 0 || neg_changes == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
