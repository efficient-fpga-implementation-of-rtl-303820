// lif_neuron -- one time step of a leaky-integrate-and-fire neuron.
//
// Discrete form of the LIF equations with a 1 ms step, in the order of the
// Norse LIF cell the network was trained with:
//   v_dec = v + (v_leak - v + i) >>> TAU_M_SHIFT      (dt/tau_m = 1/8)
//   i_dec = i - (i >>> TAU_S_SHIFT)                   (dt/tau_s = 1/4)
//   spike = v_dec > v_th
//   v'    = spike ? v_reset : v_dec
//   i'    = sat(i_dec + i_in)
// Replacing the two time-constant multiplications by shifts (tau_m = 125,
// tau_s = 250) is the paper's; the step order, the strict ">" comparison and
// saturation of the current are this design's reading of the reference model.
// Voltages and currents are signed fixed point, STATE_W bits with FRAC
// fraction bits. i_in is the already weighted input current of this step (FC1
// plus recurrent FC2 term) in the same scale, IN_W bits wide.
// Purely combinational; the caller holds v and i in registers.
module lif_neuron #(
  parameter int unsigned STATE_W     = 8,
  parameter int unsigned IN_W        = 16,
  parameter int unsigned TAU_M_SHIFT = 3,
  parameter int unsigned TAU_S_SHIFT = 2,
  parameter int          V_TH        = 16,
  parameter int          V_RESET     = 0,
  parameter int          V_LEAK      = 0
) (
  input  logic signed [STATE_W-1:0] v,
  input  logic signed [STATE_W-1:0] i,
  input  logic signed [IN_W-1:0]    i_in,
  output logic signed [STATE_W-1:0] v_next,
  output logic signed [STATE_W-1:0] i_next,
  output logic                      spike
);
  localparam int unsigned XW = ((IN_W > STATE_W) ? IN_W : STATE_W) + 3;
  localparam logic signed [XW-1:0] SMAX = XW'((1 <<< (STATE_W-1)) - 1);
  localparam logic signed [XW-1:0] SMIN = -XW'(1 <<< (STATE_W-1));

  logic signed [XW-1:0] vx, ix, dv, v_dec, i_dec, i_sum;

  function automatic logic signed [STATE_W-1:0] sat(input logic signed [XW-1:0] x);
    if (x > SMAX)      return SMAX[STATE_W-1:0];
    else if (x < SMIN) return SMIN[STATE_W-1:0];
    else               return x[STATE_W-1:0];
  endfunction

  always_comb begin
    vx     = XW'(v);
    ix     = XW'(i);
    dv     = (XW'(V_LEAK) - vx + ix) >>> TAU_M_SHIFT;
    v_dec  = vx + dv;
    i_dec  = ix - (ix >>> TAU_S_SHIFT);
    i_sum  = i_dec + XW'(i_in);
    spike  = (v_dec > XW'(V_TH));
    v_next = spike ? STATE_W'(V_RESET) : sat(v_dec);
    i_next = sat(i_sum);
  end
endmodule
