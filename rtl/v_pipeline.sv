// v_pipeline: one Euler step of the membrane equation of a PWL neuron.
//
//   v[n+1] = v[n] + dt * ( f(v[n]) - u[n] + I[n] ),   dt = 2^-DT_SHIFT
//
// with x = v + 62.5 and the piecewise-linear replacement f of the quadratic
// 0.04v^2 + 5v + 140 of the Izhikevich model:
//   PWL2: f = k1*|x| - k2                              k1 = 1/2+1/4, k2 = 20
//   PWL3: f = k1*(|x+k2| + |x-k2|) - k3*k2*k1           k1 = 1/2+1/8, k2 = 5.8, k3 = 6.4
//   PWL4: f = k2*(|x+k3| + |x-k3|) + k1*|x| - 4*k2*k3   k1 = 1/4+1/8, k2 = 1/2+1/4, k3 = 11
// Every multiplication by a constant is a sum of arithmetic right shifts, dt
// is one arithmetic right shift, so the datapath has only adders, absolute
// value units and wiring. The k values and the stage counts (5, 6 and 7
// stages for PWL2, PWL3, PWL4) follow the design; how the operations are
// distributed over the stages is this design's own arrangement (one adder or
// abs level per stage, operands kept at VB+4 bits, the result saturated to VB
// bits). For PWL2 the sign convention f = k1|v+62.5| - k2 of the model
// equation is used.
//
// Interface: v_in, u_in, i_in are 8.12 numbers presented together; v_out is
// the registered new potential (VO) V_S = v_stages(MODEL) clocks later. The
// spike rule v >= 30 -> v := c is applied outside, by the neuron unit. The
// pipeline accepts a new neuron every clock.
module v_pipeline
  import pwl_pkg::*;
#(
  parameter pwl_model_e MODEL    = PWL4,
  parameter int         DT_SHIFT = DT_SHIFT_DEFAULT
) (
  input  logic clk,
  input  fx_t  v_in,
  input  fx_t  u_in,
  input  fx_t  i_in,
  output fx_t  v_out
);
  localparam int V_S = v_stages(MODEL);
  localparam int IW  = VB + 4;
  typedef logic signed [IW-1:0] w_t;

  function automatic w_t ext(fx_t x);
    return IW'(x);
  endfunction

  function automatic w_t absv(w_t x);
    return (x < 0) ? -x : x;
  endfunction

  // potential v[n] travels alongside the computation to the last stage
  fx_t vd [V_S-1];
  always_ff @(posedge clk) begin
    vd[0] <= v_in;
    for (int k = 1; k < V_S - 1; k++) vd[k] <= vd[k-1];
  end

  // final stage common to all models: v + (g >>> DT_SHIFT), saturated
  w_t g_last;
  always_ff @(posedge clk) begin
    v_out <= sat_fx(SW'(vd[V_S-2]) + SW'(g_last >>> DT_SHIFT));
  end

  if (MODEL == PWL2) begin : g_pwl2
    w_t x1, s1, a2, s2, p3, s3, f4;
    always_ff @(posedge clk) begin
      x1 <= ext(v_in) + ext(FX_OFFSET);                 // S1
      s1 <= ext(i_in) - ext(u_in);
      a2 <= absv(x1);                                   // S2
      s2 <= s1 - ext(FX_P2_K2);
      p3 <= (a2 >>> 1) + (a2 >>> 2);                    // S3: k1 = 0.75
      s3 <= s2;
      f4 <= p3 + s3;                                    // S4
    end
    assign g_last = f4;                                 // S5 above
  end else if (MODEL == PWL3) begin : g_pwl3
    w_t xp1, xm1, s1, ap2, am2, s2, a3, s3, p4, s4, f5;
    always_ff @(posedge clk) begin
      xp1 <= ext(v_in) + ext(FX_OFFSET) + ext(FX_P3_K2); // S1
      xm1 <= ext(v_in) + ext(FX_OFFSET) - ext(FX_P3_K2);
      s1  <= ext(i_in) - ext(u_in);
      ap2 <= absv(xp1);                                  // S2
      am2 <= absv(xm1);
      s2  <= s1 - ext(FX_P3_K321);
      a3  <= ap2 + am2;                                  // S3
      s3  <= s2;
      p4  <= (a3 >>> 1) + (a3 >>> 3);                    // S4: k1 = 0.625
      s4  <= s3;
      f5  <= p4 + s4;                                    // S5
    end
    assign g_last = f5;                                  // S6 above
  end else begin : g_pwl4
    w_t xp1, xm1, x01, s1, ap2, am2, a02, s2, a3, q3, s3, p4, q4, s4, f5, s5, f6;
    always_ff @(posedge clk) begin
      xp1 <= ext(v_in) + ext(FX_OFFSET) + ext(FX_P4_K3); // S1
      xm1 <= ext(v_in) + ext(FX_OFFSET) - ext(FX_P4_K3);
      x01 <= ext(v_in) + ext(FX_OFFSET);
      s1  <= ext(i_in) - ext(u_in);
      ap2 <= absv(xp1);                                  // S2
      am2 <= absv(xm1);
      a02 <= absv(x01);
      s2  <= s1 - ext(FX_P4_4K23);
      a3  <= ap2 + am2;                                  // S3
      q3  <= (a02 >>> 2) + (a02 >>> 3);                  //     k1 = 0.375
      s3  <= s2;
      p4  <= (a3 >>> 1) + (a3 >>> 2);                    // S4: k2 = 0.75
      q4  <= q3;
      s4  <= s3;
      f5  <= p4 + q4;                                    // S5
      s5  <= s4;
      f6  <= f5 + s5;                                    // S6
    end
    assign g_last = f6;                                  // S7 above
  end
endmodule
