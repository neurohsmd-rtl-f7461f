// tb_neurohsmd_full: one complete frame through the kernel at its default
// size: a 720 x 576 frame (414720 pixels, the largest frame the buffers hold),
// 16 lanes, the default number of time steps. The host sequence is: buffer
// reset, write a foreground mask (a bright moving-object blob on an empty
// background, plus sparse grey noise), start, wait for done, read all spike
// sums. Every sum is compared with the reference column model and the frame
// time with (3*steps + 3) * 25920 + 1 cycles.
module tb_neurohsmd_full;
  import nhsmd_pkg::*;
  import tb_fp_pkg::*;
  import tb_snn_ref_pkg::*;

  localparam int unsigned W  = 720;
  localparam int unsigned H  = 576;
  localparam int unsigned NN = W * H;
  localparam int unsigned AW = $clog2(MAX_NEURONS + 1);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n = 0, start = 0, clear = 0, skip_zero = 0, busy, done;
  snn_cfg_t cfg;
  logic [AW-1:0] n_neurons = AW'(NN), pix_addr = '0, sum_addr = '0;
  logic [15:0] n_steps = 16'(DEFAULT_STEPS);
  logic pix_we = 0;
  fp32_t pix_data = '0;
  logic [SUM_BITS-1:0] sum_data;

  neurohsmd_kernel dut (.*);

  int checks = 0, failures = 0, n_fire = 0, n_silent = 0;
  fp32_t pix_m [NN];

  function automatic fp32_t pixel(int x, int y);
    if (x >= 300 && x < 380 && y >= 200 && y < 260) return to_f32(255.0);
    if (($urandom % 64) == 0) return to_f32(real'($urandom % 256));
    return FP_0_0;
  endfunction

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    cfg = dynamic_cfg();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Buffer reset.
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (busy) @(negedge clk);
    // Foreground mask from the host.
    for (int y = 0; y < int'(H); y++)
      for (int x = 0; x < int'(W); x++) begin
        pix_m[y * W + x] = pixel(x, y);
        pix_we = 1; pix_addr = AW'(y * W + x); pix_data = pix_m[y * W + x];
        @(negedge clk);
      end
    pix_we = 0;
    // One frame.
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (busy) begin
      cyc++;
      @(negedge clk);
    end
    checks++;
    if (cyc != (3 * DEFAULT_STEPS + 3) * ((NN + LANES - 1) / LANES) + 1) begin
      failures++;
      $display("FAIL frame took %0d cycles", cyc);
    end
    $display("frame cycles = %0d", cyc);
    // Read back and compare.
    for (int n = 0; n < int'(NN); n++) begin
      vm_state_t vin, vout;
      int exp_sum;
      vin = '{v1: cfg.v_init, v2: cfg.v_init, v3: cfg.v_init};
      column_ref(pix_m[n], vin, cfg, DEFAULT_STEPS, 1'b0, vout, exp_sum);
      sum_addr = AW'(n);
      @(posedge clk); #1;
      checks++;
      if (int'(sum_data) != exp_sum) begin
        failures++;
        if (failures < 10) $display("FAIL sum[%0d] = %0d, expected %0d", n, sum_data, exp_sum);
      end
      if (exp_sum > 0) n_fire++; else n_silent++;
      @(negedge clk);
    end
    $display("motion neurons firing = %0d, silent = %0d", n_fire, n_silent);
    checks++;
    if (n_fire == 0 || n_silent == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
