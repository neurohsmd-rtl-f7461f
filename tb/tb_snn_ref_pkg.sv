// tb_snn_ref_pkg: behavioural reference of the spiking network, for checking.
//
// lif_ref is one Euler step of the LIF neuron written from the equations,
// with every single-precision operation modelled by tb_fp_pkg (double
// arithmetic rounded to fp32). column_ref runs one pixel's three-layer column
// for n_steps steps exactly as the kernel loop prescribes and returns the new
// potentials and the motion-detection spike sum.
package tb_snn_ref_pkg;
  import nhsmd_pkg::*;
  import tb_fp_pkg::*;

  function automatic logic fge(logic [31:0] a, logic [31:0] b);
    return from_f32(a) >= from_f32(b);
  endfunction

  function automatic void lif_ref(input logic [31:0] v, input logic [31:0] i,
                                  input snn_cfg_t c,
                                  output logic [31:0] v_next, output logic spike);
    logic [31:0] v_raw;
    v_raw  = fadd(v, fmul(c.k_dt, fadd(fadd(c.e_l, fneg(v)), fmul(c.r_m, i))));
    spike  = fge(v_raw, c.v_th);
    v_next = spike ? c.v_reset : v_raw;
    if (!fge(v_next, c.v_min)) v_next = c.v_min;
  endfunction

  function automatic void column_ref(input logic [31:0] pix, input vm_state_t vin,
                                     input snn_cfg_t c, input int n_steps,
                                     input bit skip_zero,
                                     output vm_state_t vout, output int sum3);
    int s1 = 0, s2 = 0, s3 = 0;
    logic sp;
    logic [31:0] i1, i2, i3;
    vout = vin;
    sum3 = 0;
    if (skip_zero && !(from_f32(pix) > 0.0)) return;
    for (int t = 0; t < n_steps; t++) begin
      i1 = fmul(pix, c.p2c);
      lif_ref(vout.v1, i1, c, vout.v1, sp); s1 += int'(sp);
      i2 = fmul(to_f32(real'(s1)), c.s2c);
      lif_ref(vout.v2, i2, c, vout.v2, sp); s2 += int'(sp);
      i3 = fadd(i2, fmul(to_f32(real'(s2)), c.s2c));
      lif_ref(vout.v3, i3, c, vout.v3, sp); s3 += int'(sp);
    end
    sum3 = s3;
  endfunction

  // A parameter set whose threshold lies above the resting potential and whose
  // Euler factor is below one, so that potentials carry over between steps and
  // frames and not every input makes a neuron fire.
  function automatic snn_cfg_t dynamic_cfg();
    snn_cfg_t c;
    c = PAPER_CFG;
    c.k_dt = to_f32(0.25);
    c.v_th = to_f32(-50.0);
    c.p2c  = to_f32(0.1);
    c.s2c  = to_f32(4.0);
    return c;
  endfunction

endpackage
