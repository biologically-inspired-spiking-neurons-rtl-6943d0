// tb_pwl_snn_top_full: the network at its full size and default parameters
// (320 inputs, 30 PWL4 output neurons, dt = 2^-14), compared clock by clock
// with the behavioural reference network. One complete operation: reset,
// load a 20x16 pattern, a target word and an output select with one valid
// clock, then train until every output neuron has fired at least twice, so
// that each has gone through spike detection, the reset rule, the counter
// clear, a weight change of all 320 synapses and a new current. v_out is
// checked after every output-register update.
module tb_pwl_snn_top_full;
  import pwl_pkg::*;
  import snn_ref_pkg::*;
  localparam int M = 320, N = 30, DT = 14, CB = 16, WB = 20, ALPHA = 4;
  localparam int HIGH = 1638, LOW = 205, K = 5;
  localparam longint BIAS = 8192;

  logic clk = 0, rst = 1, valid = 0, train_en = 0, spike;
  logic [M-1:0] pattern;
  logic [N-1:0] target;
  logic [K-1:0] nsel;
  fx_t v_out, vo;

  int checks = 0, failures = 0, n_spikes = 0, n_chg = 0, n_upd = 0;
  int fired [N];

  pwl_snn_top dut (
    .clk, .rst, .valid, .input_pattern(pattern), .target, .neuron_select(nsel),
    .train_en, .v_out, .vo, .spike);

  always #5 clk = ~clk;

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  snn_ref ref_net;
  bit c_now [];
  logic [N-1:0] tgt_m, sel_m;
  longint vo_upd;
  bit pending_upd = 0;

  function automatic bit all_fired_twice();
    foreach (fired[j]) if (fired[j] < 2) return 0;
    return 1;
  endfunction

  initial begin
    automatic int tc = 0;
    ref_net = new(M, N, 2, DT, WB, CB, ALPHA, HIGH, LOW, BIAS);
    c_now = new[M];
    foreach (c_now[k]) c_now[k] = 0;
    foreach (fired[j]) fired[j] = 0;
    tgt_m = '0; sel_m = '0;
    // a 20x16 pattern: a filled rectangle in the middle of the frame
    for (int k = 0; k < M; k++) pattern[k] = ((k / 16) inside {[4:15]}) && ((k % 16) inside {[4:11]});
    target = '0; target[0] = 1; target[7] = 1; nsel = 5'd7;
    repeat (N + 3) @(posedge clk);
    #1 rst = 0; valid = 1; train_en = 1;
    while (!all_fired_twice()) begin
      automatic int j = tc % N;
      automatic longint rvo, chg;
      automatic bit rf;
      #1;
      if (pending_upd) begin
        checks++;
        if (longint'(v_out) != vo_upd) begin failures++; $display("v_out tc=%0d", tc); end
        pending_upd = 0;
      end
      rf = ref_net.step(j, c_now, tgt_m[0], train_en, rvo, chg);
      checks++;
      if (longint'(vo) != rvo || spike != rf) begin
        failures++;
        if (failures < 10) $display("tc=%0d slot %0d vo exp %0d got %0d", tc, j, rvo, vo);
      end
      if (rf) begin n_spikes++; fired[j]++; end
      if (chg != 0) n_chg++;
      if (sel_m[0]) begin n_upd++; vo_upd = longint'(vo); pending_upd = 1; end
      @(posedge clk);
      if (valid) begin
        tgt_m = target; sel_m = N'(1) << nsel;
        for (int k = 0; k < M; k++) c_now[k] = pattern[k];
        ref_net.pattern_changed();
      end else begin
        tgt_m = {tgt_m[0], tgt_m[N-1:1]}; sel_m = {sel_m[0], sel_m[N-1:1]};
      end
      tc++;
      #1 valid = 0;
    end
    $display("clocks=%0d spikes=%0d weight_changes=%0d output_updates=%0d", tc, n_spikes, n_chg, n_upd);
    checks++; if (n_chg == 0 || n_upd == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
