// tb_control_unit: checks the spike comparator (including the exact 30 mV
// boundary), that update_out_reg is 1 exactly once every N clocks at the
// selected slot after valid, that c and d are the tonic-spiking values, and
// that a spike with training on produces the learning rule's weight change.
module tb_control_unit;
  import pwl_pkg::*;
  localparam int N = 6, CB = 12, WB = 20, K = 3;
  logic clk = 0, rst = 1, valid, train_en, firing, upd;
  fx_t vo, c_rst, d_inc;
  logic [K-1:0] nsel;
  logic [N-1:0] target;
  logic [CB-1:0] c_out;
  logic signed [WB-1:0] wpos, wneg;
  int checks = 0, failures = 0, spikes = 0, updates = 0;

  control_unit #(.N(N), .CB(CB), .WB(WB), .ALPHA(3), .HIGH_PERIOD(1000), .LOW_PERIOD(100)) dut (
    .clk, .rst, .vo, .valid, .neuron_select(nsel), .target, .train_en, .c_out,
    .firing, .update_out_reg(upd), .c_rst, .d_inc, .wchg_pos(wpos), .wchg_neg(wneg));
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int e, sel;
    logic [N-1:0] tw;
    valid = 0; train_en = 1; vo = fx_t'(-266240); nsel = '0; target = '0; c_out = '0;
    @(posedge clk); #1 rst = 0;
    chk(c_rst == fx_t'(-65 * 4096), "c");
    chk(d_inc == fx_t'(6 * 4096), "d");
    for (int rep = 0; rep < 3; rep++) begin
      sel = $urandom % N;
      tw = N'($urandom);
      nsel = K'(sel); target = tw; valid = 1;
      @(posedge clk); #1 valid = 0;
      for (int t = 0; t < 5 * N; t++) begin
        int vv;
        vv = (t % 3 == 0) ? 122880 : -300000 + int'($urandom % 450000);
        if (t % 7 == 1) vv = 122879;
        vo = fx_t'(vv);
        c_out = CB'($urandom % 1200);
        #1;
        chk(firing == (vv >= 122880), $sformatf("comparator v=%0d", vv));
        if (firing) spikes++;
        chk(upd == ((t % N) == sel), $sformatf("update_out_reg t=%0d sel=%0d", t, sel));
        if (upd) updates++;
        e = firing ? ((int'(c_out) - (tw[t % N] ? 100 : 1000)) >>> 3) : 0;
        chk(int'(wpos) == e && int'(wneg) == -e, $sformatf("wchg exp %0d got %0d", e, wpos));
        @(posedge clk); #1;
      end
    end
    chk(spikes > 0 && updates == 15, "events");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
