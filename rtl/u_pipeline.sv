// u_pipeline: one Euler step of the recovery equation, shared by all models.
//
//   u[n+1] = u[n] + dt * a * (b*v[n] - u[n]),   dt = 2^-DT_SHIFT
//
// with the shift-and-add constants a = 1/8 + 1/16 + 1/64 = 0.203125 and
// b = 1/4 + 1/16 = 0.3125 of the digital tonic-spiking neuron. The arithmetic
// takes four stages (b*v, difference, a*, accumulate); the design asks for
// the U path to be exactly as long as the V path, so U_S - 4 plain delay
// stages follow. The grouping into stages and the VB+4 bit working width
// (result saturated to VB bits) are this design's own choices. The spike
// rule u := u + d is applied outside, by the neuron unit.
//
// Interface: v_in and u_in together; u_out is registered, U_S clocks later.
module u_pipeline
  import pwl_pkg::*;
#(
  parameter int U_S      = 7,
  parameter int DT_SHIFT = DT_SHIFT_DEFAULT
) (
  input  logic clk,
  input  fx_t  v_in,
  input  fx_t  u_in,
  output fx_t  u_out
);
  localparam int IW = VB + 4;
  typedef logic signed [IW-1:0] w_t;

  w_t  bv1, e2, ae3;
  fx_t u1, u2, u3;
  fx_t dly [U_S-3];   // dly[0] is the arithmetic result, the rest pad to U_S

  always_ff @(posedge clk) begin
    bv1 <= (IW'(v_in) >>> 2) + (IW'(v_in) >>> 4);            // S1: b*v
    u1  <= u_in;
    e2  <= bv1 - IW'(u1);                                     // S2: b*v - u
    u2  <= u1;
    ae3 <= (e2 >>> 3) + (e2 >>> 4) + (e2 >>> 6);              // S3: a*(...)
    u3  <= u2;
    dly[0] <= sat_fx(SW'(u3) + SW'(ae3 >>> DT_SHIFT));        // S4: u + dt*...
    for (int k = 1; k < U_S - 3; k++) dly[k] <= dly[k-1];     // delay stages
  end

  assign u_out = dly[U_S-4];

  initial assert (U_S >= 4) else $error("u_pipeline: U_S must be at least 4");
endmodule
