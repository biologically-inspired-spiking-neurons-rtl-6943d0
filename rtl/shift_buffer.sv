// shift_buffer: circulating storage buffer of DEPTH words.
//
// This is the storage element behind the V buffer, the U buffer and the
// spike counter buffer. Logically it is a DEPTH-long shift register: the word
// presented on din in one clock appears on dout exactly DEPTH clocks later,
// which is what lets one arithmetic pipeline serve many virtual neurons. It
// is built as a memory with a wrapping pointer (read and write the same slot
// each clock) instead of DEPTH shifting registers; the behaviour at the ports
// is the same and it maps to distributed or block RAM.
//
// Reset: a flag per slot is cleared, and a slot whose flag is clear reads as
// INIT, so every neuron starts from a defined state without having to clear
// the memory. The reset value is this design's own choice.
//
// Timing: dout is combinational from the memory and the current pointer;
// din is written on the rising clock edge. Latency din -> dout = DEPTH.
module shift_buffer #(
  parameter int                WIDTH = 20,
  parameter int                DEPTH = 23,
  parameter logic [WIDTH-1:0]  INIT  = '0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [DEPTH-1:0] written;
  logic [AW-1:0]    ptr;

  assign dout = written[ptr] ? mem[ptr] : INIT;

  always_ff @(posedge clk) begin
    mem[ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr     <= '0;
      written <= '0;
    end else begin
      written[ptr] <= 1'b1;
      ptr          <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
    end
  end

  initial assert (DEPTH >= 1) else $error("shift_buffer: DEPTH must be at least 1");
endmodule
