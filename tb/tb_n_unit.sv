// tb_n_unit: three neuron arrays of ten virtual neurons each, one per model
// (PWL2 with 5 pipeline stages, PWL3 with 6, PWL4 with 7), dt = 2^-4. Every
// neuron gets its own constant current. The testbench closes the spike loop
// with the 30 mV comparison, as the control unit does, and checks every VO
// against the reference neuron of its slot and model. Each model must
// produce many spikes (tonic spiking at the larger currents).
module tb_n_unit;
  import pwl_pkg::*;
  import snn_ref_pkg::*;
  localparam int N = 10, DT = 4;
  localparam int VS [3] = '{5, 6, 7};
  logic clk = 0, rst = 1;
  logic firing [3];
  fx_t i_in [3], vo [3];
  int checks = 0, failures = 0;
  int spikes [3] = '{0, 0, 0};
  longint islot [N];
  longint rv [3][N], ru [3][N];

  n_unit #(.N(N), .MODEL(PWL2), .DT_SHIFT(DT)) dut2 (
    .clk, .rst, .i_in(i_in[0]), .firing(firing[0]), .c_rst(FX_C), .d_inc(FX_D), .vo(vo[0]));
  n_unit #(.N(N), .MODEL(PWL3), .DT_SHIFT(DT)) dut3 (
    .clk, .rst, .i_in(i_in[1]), .firing(firing[1]), .c_rst(FX_C), .d_inc(FX_D), .vo(vo[1]));
  n_unit #(.N(N), .MODEL(PWL4), .DT_SHIFT(DT)) dut4 (
    .clk, .rst, .i_in(i_in[2]), .firing(firing[2]), .c_rst(FX_C), .d_inc(FX_D), .vo(vo[2]));
  always_comb for (int m = 0; m < 3; m++) firing[m] = (vo[m] >= FX_VTH);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < N; j++) begin
      islot[j] = fx(-8.0 + 3.0 * j);
      for (int m = 0; m < 3; m++) begin rv[m][j] = fx(-65.0); ru[m][j] = fx(-20.3125); end
    end
    for (int tc = -(N + 2); tc < 1000 * N; tc++) begin
      rst = (tc < 0);
      for (int m = 0; m < 3; m++) i_in[m] = fx_t'(islot[(((tc + VS[m]) % N) + N) % N]);
      #1;
      if (tc >= 0) begin
        automatic int j = tc % N;
        for (int m = 0; m < 3; m++) begin
          automatic longint vn = v_next(m, rv[m][j], ru[m][j], islot[j], DT);
          automatic longint un = u_next(rv[m][j], ru[m][j], DT);
          checks++;
          if (longint'(vo[m]) != vn) begin
            failures++;
            if (failures < 10) $display("model %0d tc=%0d neuron %0d exp %0d got %0d", m, tc, j, vn, vo[m]);
          end
          if (vn >= fx(30.0)) begin
            spikes[m]++; rv[m][j] = fx(-65.0); ru[m][j] = sat(un + fx(6.0), 20);
          end else begin
            rv[m][j] = vn; ru[m][j] = un;
          end
        end
      end
      @(posedge clk); #1;
    end
    $display("spikes PWL2=%0d PWL3=%0d PWL4=%0d", spikes[0], spikes[1], spikes[2]);
    for (int m = 0; m < 3; m++) begin
      checks++; if (spikes[m] < 2 * N) begin failures++; $display("model %0d: only %0d spikes", m, spikes[m]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
