// lif_neuron: one Euler time step of a leaky integrate-and-fire neuron.
//
// The membrane equation tau*dV/dt = -(V - E_L) + R*I is advanced by one step
// of length dt with the explicit Euler rule
//     V' = V + (dt/tau) * ((E_L - V) + R*I).
// If V' reaches the threshold the neuron fires: the spike output is raised
// and V' is replaced by the reset potential. The result is finally held at or
// above V_min. All of this follows the neuron model and parameter list of the
// source; the order "fire, then bound by V_min" and the evaluation order of
// the single-precision operations are this design's choices. The refractory
// period (2 ms) is shorter than one time step (10 ms), so it never holds a
// neuron back and is not modelled.
//
// Interface: v (present potential), i_syn (input current) and cfg (the shared
// neuronal parameters) in; v_next and spike out. Timing: combinational, five
// floating-point operations deep plus two comparisons.
module lif_neuron
  import nhsmd_pkg::*;
(
  input  fp32_t    v,
  input  fp32_t    i_syn,
  input  snn_cfg_t cfg,
  output fp32_t    v_next,
  output logic     spike
);

  fp32_t leak, drive, dv, step, v_raw, v_fired;
  logic  above_min;

  fp32_add u_leak  (.a(cfg.e_l), .b({~v[31], v[30:0]}), .y(leak));   // E_L - V
  fp32_mul u_drive (.a(cfg.r_m), .b(i_syn),             .y(drive));  // R * I
  fp32_add u_dv    (.a(leak),    .b(drive),             .y(dv));
  fp32_mul u_step  (.a(cfg.k_dt), .b(dv),               .y(step));   // dt/tau * (...)
  fp32_add u_int   (.a(v),       .b(step),              .y(v_raw));

  fp32_ge  u_fire  (.a(v_raw),   .b(cfg.v_th),  .ge(spike));

  assign v_fired = spike ? cfg.v_reset : v_raw;

  fp32_ge  u_floor (.a(v_fired), .b(cfg.v_min), .ge(above_min));

  assign v_next = above_min ? v_fired : cfg.v_min;

endmodule
