// tb_recognition: the pattern-recognition use of the network at a reduced
// size: 4 x 4 pixel patterns (M = 16), N = 16 output neurons of which the
// first four are assigned to four patterns, PWL4, dt = 2^-4.
//
// Training presents each pattern in turn with its own neuron targeted fast
// (all others slow), several epochs long. Recognition then freezes the
// weights and presents each pattern again; the assigned neuron must fire
// more often than every other neuron. Throughout, VO and the spike flag of
// every neuron update are compared with the behavioural reference network.
// All loads are made at the same slot phase, so target bit j always refers
// to the same neuron.
module tb_recognition;
  import pwl_pkg::*;
  import snn_ref_pkg::*;
  localparam int M = 16, N = 16, DT = 4, CB = 12, WB = 20, ALPHA = 2;
  localparam int HIGH = 250, LOW = 70, K = 4, NP = 4;
  localparam longint BIAS = 8192;
  localparam logic [M-1:0] PAT [NP] = '{16'b0110_1001_1111_1001,   // "A"-like
                                       16'b1110_1001_1110_1110,   // "B"-like
                                       16'b0111_1000_1000_0111,   // "C"-like
                                       16'b1110_1001_1001_1110};  // "D"-like

  logic clk = 0, rst = 1, valid = 0, train_en = 0, spike;
  logic [M-1:0] pattern;
  logic [N-1:0] target;
  logic [K-1:0] nsel;
  fx_t v_out, vo;

  int checks = 0, failures = 0;
  int count [N];

  pwl_snn_top #(.M(M), .N(N), .MODEL(PWL4), .DT_SHIFT(DT), .WB(WB), .CB(CB), .ALPHA(ALPHA),
                .HIGH_PERIOD(HIGH), .LOW_PERIOD(LOW), .I_BIAS(fx_t'(BIAS))) dut (
    .clk, .rst, .valid, .input_pattern(pattern), .target, .neuron_select(nsel),
    .train_en, .v_out, .vo, .spike);

  always #5 clk = ~clk;

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  snn_ref ref_net;
  bit c_now [];
  logic [N-1:0] tgt_m;

  // Run n clocks; the first one loads pattern/target when ld is set.
  // Neuron j is the slot at VO j+1 clocks after a load at tc = 0 mod N.
  task automatic run(int n, bit ld, ref int tc);
    for (int i = 0; i < n; i++) begin
      automatic int j = tc % N;
      automatic longint rvo, chg;
      automatic bit rf;
      valid = ld && (i == 0);
      #1;
      rf = ref_net.step(j, c_now, tgt_m[0], train_en, rvo, chg);
      checks++;
      if (longint'(vo) != rvo || spike != rf) begin
        failures++;
        if (failures < 10) $display("tc=%0d slot %0d vo exp %0d got %0d", tc, j, rvo, vo);
      end
      if (rf) count[(j + N - 1) % N]++;
      @(posedge clk);
      if (valid) begin
        tgt_m = target;
        for (int k = 0; k < M; k++) c_now[k] = pattern[k];
        ref_net.pattern_changed();
      end else tgt_m = {tgt_m[0], tgt_m[N-1:1]};
      tc++;
      #1;
    end
  endtask

  initial begin
    automatic int tc = 0;
    ref_net = new(M, N, 2, DT, WB, CB, ALPHA, HIGH, LOW, BIAS);
    c_now = new[M];
    foreach (c_now[k]) c_now[k] = 0;
    tgt_m = '0; nsel = '0; pattern = '0; target = '0;
    repeat (N + 3) @(posedge clk);
    #1 rst = 0;
    train_en = 1;
    for (int ep = 0; ep < 6; ep++)
      for (int p = 0; p < NP; p++) begin
        pattern = PAT[p]; target = N'(1) << p;
        run(N * 3000, 1, tc);
      end
    train_en = 0;
    for (int p = 0; p < NP; p++) begin
      automatic int best = 0;
      pattern = PAT[p]; target = '0;
      run(N * 400, 1, tc);                     // settle after the switch
      foreach (count[j]) count[j] = 0;
      run(N * 3000, 0, tc);
      for (int j = 1; j < N; j++) if (count[j] > count[best]) best = j;
      $display("pattern %0d: assigned neuron spikes %0d, best neuron %0d (%0d spikes)",
               p, count[p], best, count[best]);
      checks++;
      if (best != p) begin failures++; $display("pattern %0d not recognised", p); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
