// tb_neurohsmd_kernel: end-to-end test of the kernel at a reduced buffer size
// (a 10 x 10 frame, 16 lanes). The host side is modelled as the published host
// loop does it: reset the buffers, then per frame write the foreground pixel
// values, start the kernel, wait for done and read back the spike sums.
// Every spike sum and every stored potential is compared with the reference
// column model, and the busy time of every pass with the cycle formula.
// Mechanisms counted (each must occur): buffer clear, full (v1) frame, frame
// continuing from the previous frame's potentials, zero-skipping (v2) frame
// with skipped pixels, a start ignored while busy, uneven lane loads
// (n_neurons not a multiple of 16), neurons that fire and neurons that stay
// silent, the published parameter set.
module tb_neurohsmd_kernel;
  import nhsmd_pkg::*;
  import tb_fp_pkg::*;
  import tb_snn_ref_pkg::*;

  localparam int unsigned NN = 100;   // buffer size: a 10 x 10 frame
  localparam int unsigned NL = LANES;
  localparam int unsigned AW = $clog2(NN + 1);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n = 0, start = 0, clear = 0, skip_zero = 0, busy, done;
  snn_cfg_t cfg;
  logic [AW-1:0] n_neurons = AW'(NN), pix_addr = '0, sum_addr = '0;
  logic [15:0] n_steps = 16'd6;
  logic pix_we = 0;
  fp32_t pix_data = '0;
  logic [SUM_BITS-1:0] sum_data;

  neurohsmd_kernel #(.N_NEURONS(NN)) dut (.*);

  int checks = 0, failures = 0;
  int cov_clear = 0, cov_v1 = 0, cov_carry = 0, cov_v2 = 0, cov_skip = 0;
  int cov_ignored = 0, cov_uneven = 0, cov_fire = 0, cov_silent = 0, cov_paper = 0;
  fp32_t     pix_m [NN];
  vm_state_t vm_m  [NN];
  int        sum_m [NN];

  task automatic expect_eq(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Window onto the state buffers: entry peek_idx of every lane.
  int        peek_idx = 0;
  vm_state_t peek_val [NL];
  for (genvar l = 0; l < NL; l++) begin : g_peek
    always_comb peek_val[l] = dut.g_lane[l].u_bank.vm_mem[peek_idx];
  end

  task automatic write_pixels(int n_used, int zero_pct);
    for (int n = 0; n < n_used; n++) begin
      pix_m[n] = ($urandom % 100 < zero_pct) ? FP_0_0 : to_f32(real'($urandom % 256));
      @(negedge clk);
      pix_we = 1; pix_addr = AW'(n); pix_data = pix_m[n];
    end
    @(negedge clk);
    pix_we = 0;
  endtask

  task automatic pulse(bit do_clear, output int cycles);
    int dones = 0;
    @(negedge clk);
    if (do_clear) clear = 1; else start = 1;
    @(negedge clk);
    clear = 0; start = 0;
    cycles = 0;
    while (busy) begin
      cycles++;
      // A second start while busy must be ignored.
      if (cycles == 3 && !do_clear) begin
        start = 1; @(negedge clk); start = 0; cov_ignored++;
      end else begin
        @(negedge clk);
      end
      if (done) dones++;
    end
    expect_eq(dones, 1, "one done pulse");
  endtask

  task automatic read_and_check(int n_used);
    for (int n = 0; n < n_used; n++) begin
      @(negedge clk);
      sum_addr = AW'(n);
      peek_idx = n / NL;
      @(posedge clk); #1;
      expect_eq(sum_data, sum_m[n], $sformatf("sum[%0d]", n));
      checks++;
      if (peek_val[n % NL] !== vm_m[n]) begin
        failures++;
        if (failures < 15) $display("FAIL state[%0d]: got %h expected %h", n, peek_val[n % NL], vm_m[n]);
      end
    end
  endtask

  task automatic frame(snn_cfg_t c, int n_used, int steps, bit skip);
    int cyc, lane_cyc [NL], worst;
    cfg = c; n_steps = 16'(steps); skip_zero = skip; n_neurons = AW'(n_used);
    foreach (lane_cyc[l]) lane_cyc[l] = 0;
    for (int n = 0; n < n_used; n++) begin
      if (skip && !(from_f32(pix_m[n]) > 0.0)) begin
        lane_cyc[n % NL] += 3; cov_skip++;
      end else begin
        lane_cyc[n % NL] += 3 * steps + 3;
      end
      column_ref(pix_m[n], vm_m[n], c, steps, skip, vm_m[n], sum_m[n]);
      if (sum_m[n] > 0) cov_fire++; else cov_silent++;
    end
    worst = 0;
    foreach (lane_cyc[l]) if (lane_cyc[l] > worst) worst = lane_cyc[l];
    pulse(0, cyc);
    // One cycle for the settings to reach the lanes, then the slowest lane.
    expect_eq(cyc, 1 + worst, "frame cycles");
    read_and_check(n_used);
    if (skip) cov_v2++; else cov_v1++;
    if (n_used % NL != 0) cov_uneven++;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    snn_cfg_t c;
    c = dynamic_cfg();
    cfg = c;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Buffer reset for the whole 10 x 10 frame.
    n_neurons = AW'(NN);
    pulse(1, cyc);
    expect_eq(cyc, 1 + (NN + NL - 1) / NL, "clear cycles");
    cov_clear++;
    for (int n = 0; n < int'(NN); n++) begin
      vm_m[n] = '{v1: c.v_init, v2: c.v_init, v3: c.v_init};
      sum_m[n] = 0;
    end
    read_and_check(NN);
    // A sequence of frames on a moving blob plus noise.
    write_pixels(NN, 40);
    frame(c, NN, 6, 0);
    write_pixels(NN, 40);
    frame(c, NN, 6, 0);
    cov_carry++;
    write_pixels(NN, 60);
    frame(c, NN, 5, 1);
    // A smaller frame (99 pixels) leaves lanes unevenly loaded.
    c.k_dt = to_f32(0.5);
    write_pixels(99, 30);
    frame(c, 99, 8, 0);
    frame(c, 99, 8, 1);
    // The published parameter set.
    frame(PAPER_CFG, NN, 2, 0);
    cov_paper++;
    for (int n = 0; n < int'(NN); n++) expect_eq(sum_m[n], 2, "published set");

    $display("coverage: clear=%0d v1=%0d carry=%0d v2=%0d skipped=%0d ignored_start=%0d uneven=%0d fire=%0d silent=%0d paper=%0d",
             cov_clear, cov_v1, cov_carry, cov_v2, cov_skip, cov_ignored, cov_uneven, cov_fire, cov_silent, cov_paper);
    if (cov_clear == 0)   failures++;
    if (cov_v1 == 0)      failures++;
    if (cov_carry == 0)   failures++;
    if (cov_v2 == 0)      failures++;
    if (cov_skip == 0)    failures++;
    if (cov_ignored == 0) failures++;
    if (cov_uneven == 0)  failures++;
    if (cov_fire == 0)    failures++;
    if (cov_silent == 0)  failures++;
    if (cov_paper == 0)   failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
