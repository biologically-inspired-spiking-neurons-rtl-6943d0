// learning_mechanism: supervised spike-rate learning rule.
//
// Each output neuron should fire either fast (the neuron assigned to the
// presented pattern) or slow (all others). A N-bit target register, loaded
// while valid is 1 and rotated by one position every clock otherwise, gives
// in each clock the target bit tN of the neuron at the array output; tN = 1
// selects the LOW_PERIOD count (fast firing, 80 Hz) and tN = 0 the
// HIGH_PERIOD count (slow firing, 10 Hz). When that neuron fires, the
// difference between its measured period (the counter value C_out) and the
// target period is shifted right by ALPHA and becomes +W_change; -W_change
// is its two's complement. This realises dW_k = alpha * I_k * (Counter - t)
// with the sign of I_k applied in the weights bank. Without a spike (or with
// train_en low) both outputs are zero.
//
// Follows the design: the rotating target register, the selection of the
// two period constants, subtraction, shift and gating by Firing. Our own
// choices: ALPHA, the counter and weight widths, saturation to WB bits, the
// train_en input that freezes the weights during recognition, and the period
// constants (10 Hz and 80 Hz at 16384 neuron updates per second).
//
// Timing: the register updates on the rising edge; wchg_pos/wchg_neg are
// combinational from the register, c_out and firing.
module learning_mechanism #(
  parameter int N           = 30,
  parameter int CB          = 16,
  parameter int WB          = 20,
  parameter int ALPHA       = 4,
  parameter int HIGH_PERIOD = 1638,
  parameter int LOW_PERIOD  = 205
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 valid,
  input  logic [N-1:0]         target,
  input  logic                 train_en,
  input  logic [CB-1:0]        c_out,
  input  logic                 firing,
  output logic                 t_n,
  output logic signed [WB-1:0] wchg_pos,
  output logic signed [WB-1:0] wchg_neg
);
  localparam int DW = ((CB > WB) ? CB : WB) + 2;
  typedef logic signed [DW-1:0] d_t;
  localparam d_t WMAX = d_t'((1 <<< (WB-1)) - 1);
  localparam d_t WMIN = -d_t'(1 <<< (WB-1));

  logic [N-1:0] tgt;
  d_t diff, sh;
  logic signed [WB-1:0] chg;

  always_ff @(posedge clk) begin
    if (rst)        tgt <= '0;
    else if (valid) tgt <= target;
    else if (N > 1) tgt <= {tgt[0], tgt[N-1:1]};
  end

  assign t_n  = tgt[0];
  assign diff = d_t'({1'b0, c_out}) - (t_n ? d_t'(LOW_PERIOD) : d_t'(HIGH_PERIOD));
  assign sh   = diff >>> ALPHA;
  assign chg  = (sh > WMAX) ? WB'(WMAX) : (sh < WMIN) ? WB'(WMIN) : WB'(sh);

  assign wchg_pos = (firing && train_en) ? chg : '0;
  assign wchg_neg = ~wchg_pos + 1'b1;
endmodule
