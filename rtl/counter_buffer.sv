// counter_buffer: per-neuron spike-interval counters (part of the C unit).
//
// One CB-bit counter per virtual neuron circulates in an N-word buffer, in
// step with the neuron array so that the counter leaving the buffer belongs
// to the neuron whose VO is at the pipeline output. The counter is cleared
// when that neuron fires and is incremented otherwise, so at a spike c_out
// holds the number of neuron updates since the previous spike (the period
// the learning rule compares with its target). The value before clearing is
// what c_out shows. Structure follows the design; the counter width and its
// saturation at the maximum value are this design's own choices.
//
// Timing: c_out is combinational from the buffer; the update is written on
// the rising edge and the same counter returns N clocks later.
module counter_buffer #(
  parameter int N  = 30,
  parameter int CB = 16
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          counter_reset,
  output logic [CB-1:0] c_out
);
  logic [CB-1:0] next;

  always_comb begin
    if (counter_reset)  next = '0;
    else if (&c_out)    next = c_out;          // hold at the maximum
    else                next = c_out + 1'b1;
  end

  shift_buffer #(.WIDTH(CB), .DEPTH(N), .INIT('0)) u_buf (
    .clk, .rst, .din(next), .dout(c_out));
endmodule
