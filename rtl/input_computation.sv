// input_computation: total input current of the output neuron whose weights
// are leaving the weights bank (second half of the W unit).
//
//   I_in = sum_{k=1..M} (C_k ? w_k : -w_k) + i_bias
//
// Stage 1 passes each weight unchanged when its input bit C_k is 1 and
// replaces it by its two's complement when C_k is 0 (bipolar coding of the
// pixels). A pipelined binary adder tree then adds the M terms, one tree level
// per stage, each level one bit wider. A last stage adds the bias current
// i_bias. These I_S = 1 + ceil(log2 M) + 1 stages are followed by D_S plain
// delay stages, chosen so that I_S + D_S + V_S = N and the current meets the
// neuron's v, u when they leave their buffers. The stage structure follows
// the design; the bias value and the saturation of the result to IIB bits
// are this design's own choices.
//
// Interface: c_in and w_in are taken every clock; i_in is registered and
// appears I_S + D_S clocks later. No reset: the pipeline is flushed by
// holding the system reset for N clocks.
module input_computation
  import pwl_pkg::*;
#(
  parameter int  M      = 320,
  parameter int  WB     = 20,
  parameter int  IIB    = 20,
  parameter int  D_S    = 12,
  parameter fx_t I_BIAS = fx_t'(8192)
) (
  input  logic                  clk,
  input  logic [M-1:0]          c_in,
  input  logic signed [WB-1:0]  w_in [M],
  output logic signed [IIB-1:0] i_in
);
  localparam int LV  = (M > 1) ? $clog2(M) : 1;     // adder tree levels
  localparam int MP  = 1 << LV;
  localparam int TW  = WB + LV + 2;                  // tree word, never overflows
  localparam int I_S = LV + 2;
  typedef logic signed [TW-1:0] t_t;
  localparam t_t IMAX = t_t'((1 <<< (IIB-1)) - 1);
  localparam t_t IMIN = -t_t'(1 <<< (IIB-1));

  t_t lvl [LV+1][MP];
  logic signed [IIB-1:0] ib;

  // stage 1: bipolar sign
  always_ff @(posedge clk) begin
    for (int k = 0; k < MP; k++) begin
      if (k < M) lvl[0][k] <= c_in[k] ? TW'(w_in[k]) : -TW'(w_in[k]);
      else       lvl[0][k] <= '0;
    end
  end

  // stages 2 .. LV+1: adder tree
  for (genvar l = 1; l <= LV; l++) begin : g_tree
    always_ff @(posedge clk) begin
      for (int k = 0; k < (MP >> l); k++)
        lvl[l][k] <= lvl[l-1][2*k] + lvl[l-1][2*k+1];
    end
  end

  // stage I_S: bias
  always_ff @(posedge clk) begin
    t_t s;
    s = lvl[LV][0] + TW'(I_BIAS);
    ib <= (s > IMAX) ? IIB'(IMAX) : (s < IMIN) ? IIB'(IMIN) : IIB'(s);
  end

  // D_S delay stages
  if (D_S == 0) begin : g_nodelay
    assign i_in = ib;
  end else begin : g_delay
    logic signed [IIB-1:0] dly [D_S];
    always_ff @(posedge clk) begin
      dly[0] <= ib;
      for (int k = 1; k < D_S; k++) dly[k] <= dly[k-1];
    end
    assign i_in = dly[D_S-1];
  end

  initial assert (I_S == LV + 2);
endmodule
