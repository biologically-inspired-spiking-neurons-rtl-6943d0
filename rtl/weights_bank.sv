// weights_bank: storage and update of the synaptic weights (first half of
// the W unit).
//
// There is one circulating buffer per input neuron (M buffers), each holding
// the N weights that input has onto the N output neurons; all buffers advance
// one slot per clock, so in every clock the M weights of one output neuron
// leave the buffers. Each leaving weight gets the learning update added:
// +W_change when that input's pixel bit C_k is 1 and -W_change when it is 0
// (the bipolar input of the learning rule, dW = alpha*I_k*(Counter - t)).
// The sum is both the weight sent on to the input computation unit (i_k) and
// the value written back into the buffer. Structure and update follow the
// design. Our own choices: weights are WB-bit two's complement numbers in the
// same 8.12 format as the neuron current, they start at zero after reset (a
// per-slot flag, no memory clear) and the addition saturates. All M buffers
// share one pointer and are built as one memory of N words of M weights.
//
// Timing: w_out is combinational from the memory, the pointer and the
// W_change inputs; the write-back happens on the rising edge. A weight
// written in one clock is read again N clocks later.
module weights_bank #(
  parameter int M  = 320,
  parameter int N  = 30,
  parameter int WB = 20
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [M-1:0]         c_in,
  input  logic signed [WB-1:0] wchg_pos,
  input  logic signed [WB-1:0] wchg_neg,
  output logic signed [WB-1:0] w_out [M]
);
  localparam int AW = (N > 1) ? $clog2(N) : 1;
  localparam logic signed [WB:0] WMAX = (WB+1)'((1 <<< (WB-1)) - 1);
  localparam logic signed [WB:0] WMIN = -(WB+1)'(1 <<< (WB-1));

  logic signed [WB-1:0] mem [N][M];
  logic [N-1:0]         written;
  logic [AW-1:0]        ptr;

  always_comb begin
    for (int k = 0; k < M; k++) begin
      logic signed [WB:0] w, s;
      w = written[ptr] ? (WB+1)'(mem[ptr][k]) : '0;
      s = w + (WB+1)'(c_in[k] ? wchg_pos : wchg_neg);
      w_out[k] = (s > WMAX) ? WB'(WMAX) : (s < WMIN) ? WB'(WMIN) : WB'(s);
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < M; k++) mem[ptr][k] <= w_out[k];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr     <= '0;
      written <= '0;
    end else begin
      written[ptr] <= 1'b1;
      ptr          <= (ptr == AW'(N - 1)) ? '0 : ptr + 1'b1;
    end
  end
endmodule
