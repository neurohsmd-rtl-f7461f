// nhsmd_pkg: types and constants shared by the NeuroHSMD spiking-network kernel.
//
// Every arithmetic value in the kernel is an IEEE754 single-precision number
// (fp32_t), as in the published kernels. The neuronal constants are not
// hard-wired: they arrive from the host as one snn_cfg_t, because the host
// sends the same parameter set for all neurons. The PAPER_* constants below
// are the published values, bit-encoded; DEFAULT_STEPS, the widths and the
// buffer layout are this design's own choices.
package nhsmd_pkg;

  typedef logic [31:0] fp32_t;

  // Number of parallel circuits (the kernel loop unrolled by 16).
  localparam int unsigned LANES = 16;

  // Largest frame processed: 720 x 576 pixels, one neuron per pixel per layer.
  localparam int unsigned MAX_NEURONS = 720 * 576;

  // Spike counters per neuron and per frame.
  localparam int unsigned SUM_BITS = 16;
  localparam int unsigned DEFAULT_STEPS = 10;

  // Runtime neuronal parameters, all fp32.
  typedef struct packed {
    fp32_t p2c;      // pixel value -> input current of the first layer
    fp32_t s2c;      // spike sum -> synaptic current (synaptic weight)
    fp32_t r_m;      // membrane resistance R
    fp32_t k_dt;     // Euler factor dt / tau
    fp32_t e_l;      // resting potential E_L
    fp32_t v_reset;  // potential after a spike
    fp32_t v_th;     // firing threshold
    fp32_t v_min;    // lower bound of the membrane potential
    fp32_t v_init;   // potential loaded by a buffer reset
  } snn_cfg_t;

  // Membrane potentials of the three layers of one pixel's neuron column.
  typedef struct packed {
    fp32_t v1;  // pixel-to-current layer (L2 in the layer naming of the text)
    fp32_t v2;  // motion-stability layer (L3)
    fp32_t v3;  // motion-detection layer (L4)
  } vm_state_t;

  // fp32 encodings of the published values.
  localparam fp32_t FP_0_0    = 32'h0000_0000;
  localparam fp32_t FP_1_0    = 32'h3F80_0000;  //  1.0
  localparam fp32_t FP_17_5   = 32'h418C_0000;  //  17.5
  localparam fp32_t FP_1370   = 32'h44AB_4000;  //  1370.0
  localparam fp32_t FP_M55    = 32'hC25C_0000;  // -55.0
  localparam fp32_t FP_M70    = 32'hC28C_0000;  // -70.0

  // dt = 10 ms and tau = 10 ms give dt/tau = 1.0.
  localparam snn_cfg_t PAPER_CFG = '{
    p2c:     FP_17_5,
    s2c:     FP_1370,
    r_m:     FP_1_0,
    k_dt:    FP_1_0,
    e_l:     FP_M55,
    v_reset: FP_M70,
    v_th:    FP_M70,
    v_min:   FP_M70,
    v_init:  FP_M55
  };

  // Barrel shifters built from five fixed-distance stages (1, 2, 4, 8, 16).
  // Used by the floating-point units for alignment and normalisation.
  function automatic logic [27:0] shl28(logic [27:0] x, logic [4:0] amt);
    for (int k = 0; k < 5; k++)
      if (amt[k]) x = x << (1 << k);
    return x;
  endfunction

  // Right shift of a 27-bit mantissa; every bit shifted out is ORed into bit 0.
  function automatic logic [26:0] shr27_sticky(logic [26:0] x, logic [4:0] amt);
    logic st;
    st = 1'b0;
    for (int k = 0; k < 5; k++)
      if (amt[k]) begin
        st = st | |(x & ((27'd1 << (1 << k)) - 27'd1));
        x  = x >> (1 << k);
      end
    return x | {26'd0, st};
  endfunction

  typedef enum logic [2:0] {
    L_IDLE,
    L_CLEAR,
    L_READ,
    L_LOAD,
    L_RUN,
    L_WRITE
  } lane_state_e;

endpackage
