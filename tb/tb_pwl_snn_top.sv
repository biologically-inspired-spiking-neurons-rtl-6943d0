// tb_pwl_snn_top: end-to-end run of the whole network at a reduced size
// (8 inputs, 16 output neurons, PWL4, dt = 2^-4) against the behavioural
// reference network.
//
// Phase 1 trains: a pattern, a target word (neurons 3 and 9 should fire
// fast) and neuron_select are loaded with one valid pulse, training is on.
// Phase 2 switches training off and presents a second pattern; phase 3
// reloads the first pattern, still without training. In every clock the
// potential VO and the spike flag of the neuron at the array output are
// compared with the reference, and v_out is checked one clock after each
// output-register update. Counted mechanisms, each of which must occur:
// spikes, positive and negative weight changes, output-register updates,
// spikes while training is off (no weight change), pattern reloads. At the
// end the trained fast neurons must fire with a shorter period than the
// others.
module tb_pwl_snn_top;
  import pwl_pkg::*;
  import snn_ref_pkg::*;
  localparam int M = 8, N = 16, DT = 4, CB = 12, WB = 20, ALPHA = 1;
  localparam int HIGH = 200, LOW = 60, VS = 7, K = 4;
  localparam longint BIAS = 8192;

  logic clk = 0, rst = 1, valid = 0, train_en = 0, spike;
  logic [M-1:0] pattern;
  logic [N-1:0] target;
  logic [K-1:0] nsel;
  fx_t v_out, vo;

  int checks = 0, failures = 0;
  int n_spikes = 0, n_pos = 0, n_neg = 0, n_upd = 0, n_frozen = 0, n_loads = 0;
  longint last_cnt [N];
  longint per_sum_fast = 0, per_sum_slow = 0;
  int     per_n_fast = 0, per_n_slow = 0;

  pwl_snn_top #(.M(M), .N(N), .MODEL(PWL4), .DT_SHIFT(DT), .WB(WB), .CB(CB), .ALPHA(ALPHA),
                .HIGH_PERIOD(HIGH), .LOW_PERIOD(LOW), .I_BIAS(fx_t'(BIAS))) dut (
    .clk, .rst, .valid, .input_pattern(pattern), .target, .neuron_select(nsel),
    .train_en, .v_out, .vo, .spike);

  always #5 clk = ~clk;

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  snn_ref ref_net;
  bit c_now [];            // pattern register as the hardware holds it
  logic [N-1:0] tgt_m, sel_m;
  longint vo_upd;
  bit pending_upd = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", msg); end
  endtask

  task automatic run_cycles(int n, bit measure, ref int tc);
    for (int i = 0; i < n; i++) begin
      automatic int j = tc % N;
      automatic longint rvo, chg;
      automatic bit rf;
      #1;
      if (pending_upd) begin
        chk(longint'(v_out) == vo_upd, $sformatf("v_out tc=%0d exp %0d got %0d", tc, vo_upd, v_out));
        pending_upd = 0;
      end
      last_cnt[j] = ref_net.cnt[j];
      rf = ref_net.step(j, c_now, tgt_m[0], train_en, rvo, chg);
      chk(longint'(vo) == rvo && spike == rf,
          $sformatf("tc=%0d neuron slot %0d vo exp %0d got %0d spike %0b/%0b", tc, j, rvo, vo, rf, spike));
      if (rf) begin
        n_spikes++;
        if (!train_en) n_frozen++;
        if (measure) begin
          if (j == 4 || j == 10) begin per_sum_fast += last_cnt[j]; per_n_fast++; end
          else          begin per_sum_slow += last_cnt[j];   per_n_slow++; end
        end
      end
      if (chg > 0) n_pos++;
      if (chg < 0) n_neg++;
      if (sel_m[0]) begin n_upd++; vo_upd = longint'(vo); pending_upd = 1; end
      // next clock: registers as the design describes them
      @(posedge clk);
      if (valid) begin tgt_m = target; sel_m = N'(1) << nsel; end
      else begin tgt_m = {tgt_m[0], tgt_m[N-1:1]}; sel_m = {sel_m[0], sel_m[N-1:1]}; end
      if (valid) begin
        for (int k = 0; k < M; k++) c_now[k] = pattern[k];
        ref_net.pattern_changed();
        n_loads++;
      end
      tc++;
      #1;
    end
  endtask

  initial begin
    automatic int tc = 0;
    ref_net = new(M, N, 2, DT, WB, CB, ALPHA, HIGH, LOW, BIAS);
    c_now = new[M];
    foreach (c_now[k]) c_now[k] = 0;
    foreach (last_cnt[j]) last_cnt[j] = 0;
    tgt_m = '0; sel_m = '0;
    pattern = '0; target = '0; nsel = '0;
    repeat (N + 3) @(posedge clk);
    #1 rst = 0;
    // cycle 0: load pattern (target bit j then belongs to slot 1 + j), targets and output select with one valid clock
    pattern = 8'b1011_0010; target = '0; target[3] = 1; target[9] = 1; nsel = 4'd3;
    valid = 1; train_en = 0;
    run_cycles(1, 0, tc);
    valid = 0; train_en = 1;
    run_cycles(N * 6000 - 1, 0, tc);   // next load at the same slot phase                 // phase 1: training
    train_en = 0;
    pattern = 8'b0100_1101; valid = 1;           // phase 2: other pattern, frozen
    run_cycles(1, 0, tc);
    valid = 0;
    run_cycles(N * 600 - 1, 0, tc);
    pattern = 8'b1011_0010; valid = 1;           // phase 3: trained pattern again
    run_cycles(1, 0, tc);
    valid = 0;
    run_cycles(N * 3000, 1, tc);
    $display("spikes=%0d pos=%0d neg=%0d upd=%0d frozen_spikes=%0d loads=%0d",
             n_spikes, n_pos, n_neg, n_upd, n_frozen, n_loads);
    chk(n_spikes > 0, "no spike");
    chk(n_pos > 0, "no positive weight change");
    chk(n_neg > 0, "no negative weight change");
    chk(n_upd > 0, "no output update");
    chk(n_frozen > 0, "no spike with training off");
    chk(n_loads == 3, "pattern loads");
    chk(per_n_fast > 0 && per_n_slow > 0, "no spikes measured after training");
    if (per_n_fast > 0 && per_n_slow > 0) begin
      $display("mean period fast=%0d slow=%0d", per_sum_fast / per_n_fast, per_sum_slow / per_n_slow);
      chk(per_sum_fast * per_n_slow < per_sum_slow * per_n_fast, "trained neurons not faster");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
