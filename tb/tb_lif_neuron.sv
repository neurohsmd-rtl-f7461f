// tb_lif_neuron: checks one LIF Euler step against the reference model:
// the published parameter set, a threshold-above-rest set, the reset and the
// V_min floor, and 5000 random potentials, currents and Euler factors.
module tb_lif_neuron;
  import nhsmd_pkg::*;
  import tb_fp_pkg::*;
  import tb_snn_ref_pkg::*;

  logic [31:0] v, i;
  snn_cfg_t    cfg;
  logic [31:0] v_next, v_exp;
  logic        spike, spike_exp;
  int checks = 0, failures = 0;
  int n_fire = 0, n_quiet = 0;

  lif_neuron dut (.v, .i_syn(i), .cfg, .v_next, .spike);

  task automatic check(logic [31:0] vv, logic [31:0] ii, snn_cfg_t cc);
    v = vv; i = ii; cfg = cc;
    #1;
    lif_ref(vv, ii, cc, v_exp, spike_exp);
    checks++;
    if (!feq(v_next, v_exp) || spike != spike_exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL v=%h i=%h: got %h/%0d expected %h/%0d", vv, ii, v_next, spike, v_exp, spike_exp);
    end
    if (spike) n_fire++; else n_quiet++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    snn_cfg_t c;
    // Published parameters: dt/tau = 1 gives V' = E_L + R*I = -55 + I,
    // which is above the -70 mV threshold, so the neuron fires and resets.
    check(FP_M55, FP_0_0, PAPER_CFG);
    checks++;
    if (!(spike && v_next == FP_M70)) failures++;
    // Threshold above rest: no input, no spike, V moves a quarter towards E_L.
    c = dynamic_cfg();
    check(to_f32(-60.0), FP_0_0, c);
    checks++;
    if (spike || v_next != to_f32(-58.75)) failures++;
    // Strong input fires.
    check(to_f32(-55.0), to_f32(40.0), c);
    checks++;
    if (!spike || v_next != FP_M70) failures++;
    // Negative current drives V below V_min: held at V_min.
    check(to_f32(-69.0), to_f32(-100.0), c);
    checks++;
    if (spike || v_next != FP_M70) failures++;
    for (int n = 0; n < 5000; n++) begin
      c = dynamic_cfg();
      c.k_dt = to_f32(real'($urandom % 1000 + 1) / 1000.0);
      c.v_th = to_f32(-60.0 + real'($urandom % 2000) / 100.0);
      check(to_f32(-75.0 + real'($urandom % 3000) / 100.0),
            to_f32(real'(int'($urandom % 6000) - 1000) / 100.0), c);
    end
    if (n_fire == 0 || n_quiet == 0) failures++;
    $display("fired=%0d quiet=%0d", n_fire, n_quiet);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
