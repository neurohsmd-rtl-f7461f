// tb_neurohsmd_workloads: the kernel at its default size on frames of the
// sizes found in the change-detection sequences it is meant for. Three frame
// sizes are run back to back on one instance, each after a buffer reset:
//   * 320 x 240 (76800 pixels, 4800 per lane) in v1 mode,
//   * 645 x 315 (203175 pixels, not a multiple of 16: lanes 0..6 hold one
//     entry more than lanes 7..15) in v1 mode,
//   * 720 x 540 (388800 pixels) in v2 mode, where zero pixels are skipped.
// Each frame is a foreground mask (a bright blob, a dimmer blob and sparse
// grey noise on an empty background). Every spike sum is compared with the
// reference column model. The frame time is checked against
// 1 + max over lanes of the lane's cycle count, where a simulated pixel costs
// 3*steps + 3 cycles and a skipped one 3.
module tb_neurohsmd_workloads;
  import nhsmd_pkg::*;
  import tb_fp_pkg::*;
  import tb_snn_ref_pkg::*;

  localparam int unsigned AW   = $clog2(MAX_NEURONS + 1);
  localparam int unsigned NWL  = 3;
  localparam int unsigned WS [NWL] = '{320, 645, 720};
  localparam int unsigned HS [NWL] = '{240, 315, 540};
  localparam bit          V2 [NWL] = '{1'b0, 1'b0, 1'b1};

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n = 0, start = 0, clear = 0, skip_zero = 0, busy, done;
  snn_cfg_t cfg;
  logic [AW-1:0] n_neurons = '0, pix_addr = '0, sum_addr = '0;
  logic [15:0] n_steps = 16'(DEFAULT_STEPS);
  logic pix_we = 0;
  fp32_t pix_data = '0;
  logic [SUM_BITS-1:0] sum_data;

  neurohsmd_kernel dut (.*);

  int checks = 0, failures = 0, n_fire = 0, n_silent = 0, n_skipped = 0;
  fp32_t pix_m [MAX_NEURONS];
  longint lane_cyc [LANES];

  function automatic fp32_t pixel(int x, int y, int w);
    if (x >= w / 3 && x < w / 3 + 60 && y >= 100 && y < 150) return to_f32(255.0);
    if (x >= 20 && x < 50 && y >= 20 && y < 40) return to_f32(90.0);
    if (($urandom % 64) == 0) return to_f32(real'($urandom % 256));
    return FP_0_0;
  endfunction

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = dynamic_cfg();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int wl = 0; wl < int'(NWL); wl++) begin
      int nn, cyc;
      longint exp_cyc;
      nn = int'(WS[wl] * HS[wl]);
      n_neurons = AW'(nn);
      skip_zero = V2[wl];
      // Buffer reset.
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      cyc = 0;
      while (busy) begin
        cyc++;
        @(negedge clk);
      end
      checks++;
      if (cyc != 1 + (nn + int'(LANES) - 1) / int'(LANES)) begin
        failures++;
        $display("FAIL %0dx%0d clear took %0d cycles", WS[wl], HS[wl], cyc);
      end
      // Foreground mask, and the expected lane loads.
      foreach (lane_cyc[l]) lane_cyc[l] = 0;
      for (int n = 0; n < nn; n++) begin
        int x, y;
        bit skip;
        x = n % int'(WS[wl]);
        y = n / int'(WS[wl]);
        pix_m[n] = pixel(x, y, int'(WS[wl]));
        skip = V2[wl] && !(from_f32(pix_m[n]) > 0.0);
        lane_cyc[n % LANES] += skip ? 3 : 3 * DEFAULT_STEPS + 3;
        if (skip) n_skipped++;
        pix_we = 1; pix_addr = AW'(n); pix_data = pix_m[n];
        @(negedge clk);
      end
      pix_we = 0;
      exp_cyc = 0;
      foreach (lane_cyc[l]) if (lane_cyc[l] > exp_cyc) exp_cyc = lane_cyc[l];
      exp_cyc++;
      // One frame.
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (busy) begin
        cyc++;
        @(negedge clk);
      end
      checks++;
      if (longint'(cyc) != exp_cyc) begin
        failures++;
        $display("FAIL %0dx%0d frame took %0d cycles, expected %0d", WS[wl], HS[wl], cyc, exp_cyc);
      end
      $display("%0dx%0d %s frame cycles = %0d", WS[wl], HS[wl], V2[wl] ? "v2" : "v1", cyc);
      // Read back and compare.
      for (int n = 0; n < nn; n++) begin
        vm_state_t vin, vout;
        int exp_sum;
        vin = '{v1: cfg.v_init, v2: cfg.v_init, v3: cfg.v_init};
        column_ref(pix_m[n], vin, cfg, DEFAULT_STEPS, V2[wl], vout, exp_sum);
        sum_addr = AW'(n);
        @(posedge clk); #1;
        checks++;
        if (int'(sum_data) != exp_sum) begin
          failures++;
          if (failures < 10) $display("FAIL %0dx%0d sum[%0d] = %0d, expected %0d",
                                      WS[wl], HS[wl], n, sum_data, exp_sum);
        end
        if (exp_sum > 0) n_fire++; else n_silent++;
        @(negedge clk);
      end
    end
    $display("firing = %0d, silent = %0d, skipped = %0d", n_fire, n_silent, n_skipped);
    checks++;
    if (n_fire == 0 || n_silent == 0 || n_skipped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
