// lif_neuron: one time step of a leaky integrate-and-fire neuron.
//
// The membrane equation du/dt = (u_rest - u)/tau_mem + I/c_mem is integrated
// with one forward-Euler step per LSM time step. The time constant and the
// capacitance are powers of two, so the step is two arithmetic shifts and two
// additions:
//     v = u + ((u_rest - u) >>> leak_shift) + (I >>> in_shift)
// v is saturated to the 16-bit membrane range. The neuron fires when
// v >= u_th, and then u_out is set to u_rest. The firing rule follows the
// published model. The reset value, the shift form of the constants and the
// saturation are this design's choice. Inhibitory (negative) currents may
// drive the membrane below rest.
//
// Purely combinational: u_out and spike follow u_in, i_syn and cfg in the
// same cycle.
module lif_neuron
  import lsm_pkg::*;
#(
  parameter int CW = CUR_W
) (
  input  logic signed [U_W-1:0] u_in,
  input  logic signed [CW-1:0]  i_syn,
  input  lif_cfg_t              cfg,
  output logic signed [U_W-1:0] u_out,
  output logic                  spike
);

  localparam int IW = ((CW > U_W) ? CW : U_W) + 3;
  localparam logic signed [IW-1:0] UMAX = IW'((1 << (U_W - 1)) - 1);
  localparam logic signed [IW-1:0] UMIN = -IW'(1 << (U_W - 1));

  logic signed [IW-1:0] leak, inj, v;
  logic signed [U_W-1:0] v_sat;

  always_comb begin
    leak  = (IW'(cfg.u_rest) - IW'(u_in)) >>> cfg.leak_shift;
    inj   = IW'(i_syn) >>> cfg.in_shift;
    v     = IW'(u_in) + leak + inj;
    if (v > UMAX)      v_sat = UMAX[U_W-1:0];
    else if (v < UMIN) v_sat = UMIN[U_W-1:0];
    else               v_sat = v[U_W-1:0];
    spike = (v_sat >= cfg.u_th);
    u_out = spike ? cfg.u_rest : v_sat;
  end

endmodule
