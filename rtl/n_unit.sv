// n_unit: the neuron array, N virtual neurons on one V pipeline and one U
// pipeline.
//
// The potentials v and recovery values u of all neurons circulate through a
// ring made of the pipeline (V_S stages) and a buffer (N - V_S words); a
// neuron's state goes round once every N clocks and is advanced by one Euler
// step per round. At the pipeline output the control unit compares VO with
// the spike apex and returns Firing; with Firing set the neuron's reset rule
// is applied on the way back into the buffers: v := c and u := u + d.
// Otherwise the new v and u are stored as computed. The U pipeline is padded
// to the V pipeline's length so both outputs belong to the same neuron. This
// structure follows the design. Our own choices: the start state v = c,
// u = b*c of every neuron after reset and the saturation of u + d.
//
// Interface: i_in must be the current of the neuron whose v, u leave the
// buffers in that clock; vo (registered) is that neuron's new potential V_S
// clocks later; firing, c_rst and d_inc are combinational inputs for the
// neuron at vo. Reset must be held for at least N clocks.
module n_unit
  import pwl_pkg::*;
#(
  parameter int         N        = 30,
  parameter pwl_model_e MODEL    = PWL4,
  parameter int         DT_SHIFT = DT_SHIFT_DEFAULT,
  parameter fx_t        V_INIT   = FX_C,      // start potential (c)
  parameter fx_t        U_INIT   = FX_U0      // start recovery value (b*c)
) (
  input  logic clk,
  input  logic rst,
  input  fx_t  i_in,
  input  logic firing,
  input  fx_t  c_rst,
  input  fx_t  d_inc,
  output fx_t  vo
);
  localparam int V_S = v_stages(MODEL);
  localparam int U_S = V_S;
  localparam int BUF = N - V_S;       // V_buffer_size = U_buffer_size

  fx_t v_buf, u_buf, u_new, v_wr, u_wr;

  v_pipeline #(.MODEL(MODEL), .DT_SHIFT(DT_SHIFT)) u_vpipe (
    .clk, .v_in(v_buf), .u_in(u_buf), .i_in, .v_out(vo));

  u_pipeline #(.U_S(U_S), .DT_SHIFT(DT_SHIFT)) u_upipe (
    .clk, .v_in(v_buf), .u_in(u_buf), .u_out(u_new));

  assign v_wr = firing ? c_rst : vo;
  assign u_wr = firing ? sat_fx(SW'(u_new) + SW'(d_inc)) : u_new;

  shift_buffer #(.WIDTH(VB), .DEPTH(BUF), .INIT(V_INIT)) u_vbuf (
    .clk, .rst, .din(v_wr), .dout(v_buf));

  shift_buffer #(.WIDTH(VB), .DEPTH(BUF), .INIT(U_INIT)) u_ubuf (
    .clk, .rst, .din(u_wr), .dout(u_buf));

  initial assert (BUF >= 1) else $error("n_unit: N must exceed the V pipeline depth");
endmodule
