// control_unit: spike detection, output selection and learning (C unit).
//
// The comparator raises Firing when the new potential VO of the neuron at the
// array output has reached the spike apex VTH (30 mV); Firing drives the
// neuron reset (v := c, u := u + d, with c and d supplied here), the spike
// counter clear and the learning rule. For the output, neuron_select is
// decoded to a one-hot word; while valid is 1 the word is loaded into an
// N-bit register, afterwards the register rotates by one position per clock,
// so its last bit update_out_reg is 1 in exactly one clock out of N: the clock
// in which the selected neuron's VO is at the array output. The learning
// mechanism is instantiated here. All of this follows the design; the reset
// values c = -65 and d = 6 (tonic spiking) are taken from the usual
// Izhikevich parameters and the register reset value is our own choice.
//
// Slot convention: bit j of target and neuron_select value j address the
// neuron that is at the array output j clocks after the last clock with
// valid = 1 (and then every N clocks). Load with train_en low, or hold valid
// for a single clock, so that no update uses a half-loaded register.
module control_unit
  import pwl_pkg::*;
#(
  parameter int  N           = 30,
  parameter int  CB          = 16,
  parameter int  WB          = 20,
  parameter int  ALPHA       = 4,
  parameter int  HIGH_PERIOD = 1638,
  parameter int  LOW_PERIOD  = 205,
  parameter fx_t VTH         = FX_VTH,
  parameter fx_t C_RESET     = FX_C,
  parameter fx_t D_INC       = FX_D,
  localparam int K           = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  fx_t                  vo,
  input  logic                 valid,
  input  logic [K-1:0]         neuron_select,
  input  logic [N-1:0]         target,
  input  logic                 train_en,
  input  logic [CB-1:0]        c_out,
  output logic                 firing,
  output logic                 update_out_reg,
  output fx_t                  c_rst,
  output fx_t                  d_inc,
  output logic signed [WB-1:0] wchg_pos,
  output logic signed [WB-1:0] wchg_neg
);
  logic [N-1:0] sel;

  assign firing = (vo >= VTH);
  assign c_rst  = C_RESET;
  assign d_inc  = D_INC;

  // encoder and rotating one-hot register
  always_ff @(posedge clk) begin
    if (rst)        sel <= '0;
    else if (valid) sel <= N'(1) << neuron_select;
    else if (N > 1) sel <= {sel[0], sel[N-1:1]};
  end
  assign update_out_reg = sel[0];

  learning_mechanism #(
    .N(N), .CB(CB), .WB(WB), .ALPHA(ALPHA),
    .HIGH_PERIOD(HIGH_PERIOD), .LOW_PERIOD(LOW_PERIOD)
  ) u_learn (
    .clk, .rst, .valid, .target, .train_en, .c_out, .firing,
    .t_n(), .wchg_pos, .wchg_neg);
endmodule
