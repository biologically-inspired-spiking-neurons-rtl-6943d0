// output_provider: the register that drives the digital V signal.
//
// The neuron array presents the new membrane potential VO of a different
// virtual neuron every clock. When the control unit raises update (once every
// N clocks, the slot of the neuron chosen with neuron_select) the register
// takes VO; in all other clocks it holds, so v_out is the selected neuron's
// membrane potential, refreshed once per neuron update period. The register
// is as the design describes it; its reset value (0) is this design's choice.
module output_provider #(
  parameter int VB = 20
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          update,
  input  logic [VB-1:0] vo,
  output logic [VB-1:0] v_out
);
  always_ff @(posedge clk) begin
    if (rst)         v_out <= '0;
    else if (update) v_out <= vo;
  end
endmodule
