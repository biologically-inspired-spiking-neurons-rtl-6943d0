// pwl_snn_top: trainable, time-multiplexed network of piecewise-linear
// spiking neurons.
//
// M input neurons (one per pixel of a binary pattern) drive N output neurons
// through an M x N weight matrix. Rather than building N neurons, one
// pipelined neuron datapath is shared: in every clock the weights bank
// releases the M weights of one output neuron, the input computation unit
// turns them and the pattern bits into that neuron's current, and the neuron
// array advances that neuron by one Euler step of the PWL model. The control
// unit detects the spike, measures the spike interval with the counter
// buffer, computes the weight change of the supervised rate rule (written
// back into the weights bank) and copies the selected neuron's potential to
// the output provider. Every neuron is updated once per N clocks; the
// pipeline lengths obey I_S + D_S + V_S = N so that the weights, current,
// state and counter of one neuron always meet in the same clock.
//
// Interface: input_pattern, target and neuron_select are taken while valid is
// 1; train_en enables weight updates; v_out is the selected neuron's
// potential (8.12 fixed point), refreshed once every N clocks. vo and spike
// show the neuron at the array output in each clock (observation ports).
// Reset must be held for at least N clocks. See control_unit for how target
// bits and neuron_select map onto neurons. VTH, C_RESET and D_INC default to
// the tonic-spiking values; other neuron types can set them (the recovery
// constants a, b stay those of the U pipeline).
module pwl_snn_top
  import pwl_pkg::*;
#(
  parameter int         M           = 320,
  parameter int         N           = 30,
  parameter pwl_model_e MODEL       = PWL4,
  parameter int         DT_SHIFT    = DT_SHIFT_DEFAULT,
  parameter int         WB          = 20,
  parameter int         CB          = 16,
  parameter int         ALPHA       = 4,
  parameter int         HIGH_PERIOD = 1638,
  parameter int         LOW_PERIOD  = 205,
  parameter fx_t        I_BIAS      = fx_t'(8192),
  parameter fx_t        VTH         = FX_VTH,   // spike apex, 30 mV
  parameter fx_t        C_RESET     = FX_C,     // c, -65 mV
  parameter fx_t        D_INC       = FX_D,     // d, 6
  localparam int        K           = (N > 1) ? $clog2(N) : 1
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         valid,
  input  logic [M-1:0] input_pattern,
  input  logic [N-1:0] target,
  input  logic [K-1:0] neuron_select,
  input  logic         train_en,
  output fx_t          v_out,
  output fx_t          vo,
  output logic         spike
);
  localparam int V_S = v_stages(MODEL);
  localparam int I_S = ((M > 1) ? $clog2(M) : 1) + 2;
  localparam int D_S = N - I_S - V_S;
  localparam fx_t U_INIT = (C_RESET >>> 2) + (C_RESET >>> 4);   // b*c

  logic [M-1:0]         c_reg;
  logic signed [WB-1:0] w_bank [M];
  logic signed [WB-1:0] wchg_pos, wchg_neg;
  fx_t                  i_cur, c_rst, d_inc;
  logic [CB-1:0]        c_out;
  logic                 firing, update_out_reg;

  // input pattern register
  always_ff @(posedge clk) begin
    if (rst)        c_reg <= '0;
    else if (valid) c_reg <= input_pattern;
  end

  // W unit
  weights_bank #(.M(M), .N(N), .WB(WB)) u_wbank (
    .clk, .rst, .c_in(c_reg), .wchg_pos, .wchg_neg, .w_out(w_bank));

  input_computation #(.M(M), .WB(WB), .IIB(VB), .D_S(D_S), .I_BIAS(I_BIAS)) u_icomp (
    .clk, .c_in(c_reg), .w_in(w_bank), .i_in(i_cur));

  // N unit
  n_unit #(.N(N), .MODEL(MODEL), .DT_SHIFT(DT_SHIFT), .V_INIT(C_RESET), .U_INIT(U_INIT)) u_nunit (
    .clk, .rst, .i_in(i_cur), .firing, .c_rst, .d_inc, .vo);

  // C unit
  counter_buffer #(.N(N), .CB(CB)) u_cnt (
    .clk, .rst, .counter_reset(firing), .c_out);

  control_unit #(
    .N(N), .CB(CB), .WB(WB), .ALPHA(ALPHA),
    .HIGH_PERIOD(HIGH_PERIOD), .LOW_PERIOD(LOW_PERIOD),
    .VTH(VTH), .C_RESET(C_RESET), .D_INC(D_INC)
  ) u_ctrl (
    .clk, .rst, .vo, .valid, .neuron_select, .target, .train_en, .c_out,
    .firing, .update_out_reg, .c_rst, .d_inc, .wchg_pos, .wchg_neg);

  output_provider #(.VB(VB)) u_out (
    .clk, .rst, .update(update_out_reg), .vo(vo), .v_out(v_out));

  assign spike = firing;

  initial assert (D_S >= 0)
    else $error("pwl_snn_top: N too small for the pipelines (I_S + V_S > N)");
endmodule
