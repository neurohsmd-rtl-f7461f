// tb_snn_lane: one lane with its bank. Runs a buffer clear, then several
// frames against the reference column model: normal frames, frames whose
// potentials carry over from the previous one, zero-skipping frames and a
// frame with the published parameters. Checks every spike sum, every stored
// potential and the number of cycles each pass takes (3*n_steps + 3 per
// simulated pixel, 3 per skipped pixel, 1 per cleared entry).
module tb_snn_lane;
  import nhsmd_pkg::*;
  import tb_fp_pkg::*;
  import tb_snn_ref_pkg::*;

  localparam int unsigned DEPTH = 23;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n = 0, start = 0, clear = 0, skip_zero = 0, busy;
  snn_cfg_t cfg;
  logic [15:0] n_steps = 16'd5;
  logic [AW:0] count = (AW+1)'(DEPTH);
  logic [AW-1:0] rd_addr, wr_addr, pix_waddr = '0, sum_raddr = '0;
  fp32_t pix_rdata, pix_wdata = '0;
  vm_state_t vm_rdata, vm_wdata;
  logic wr_en, pix_we = 0;
  logic [SUM_BITS-1:0] sum_wdata, sum_rdata;

  snn_lane #(.DEPTH(DEPTH)) dut (.*);
  neuron_bank #(.DEPTH(DEPTH)) bank (.*);

  int checks = 0, failures = 0;
  int n_skipped = 0, n_spiking = 0, n_silent = 0;
  fp32_t     pix_m [DEPTH];
  vm_state_t vm_m  [DEPTH];
  int        sum_m [DEPTH];

  task automatic expect_eq(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic load_pixels(int zero_pct);
    for (int k = 0; k < int'(DEPTH); k++) begin
      pix_m[k] = ($urandom % 100 < zero_pct) ? FP_0_0 : to_f32(real'($urandom % 256));
      @(negedge clk);
      pix_we = 1; pix_waddr = AW'(k); pix_wdata = pix_m[k];
    end
    @(negedge clk);
    pix_we = 0;
  endtask

  // Pulse `start` or `clear`, count the busy cycles.
  task automatic run(bit do_clear, output int cycles);
    @(negedge clk);
    if (do_clear) clear = 1; else start = 1;
    @(negedge clk);
    clear = 0; start = 0;
    cycles = 0;
    while (busy) begin
      cycles++;
      @(negedge clk);
    end
  endtask

  task automatic frame(snn_cfg_t c, int steps, bit skip);
    int cyc, exp_cyc;
    cfg = c; n_steps = 16'(steps); skip_zero = skip;
    exp_cyc = 0;
    for (int k = 0; k < int'(DEPTH); k++) begin
      if (skip && !(from_f32(pix_m[k]) > 0.0)) begin
        exp_cyc += 3; n_skipped++;
      end else begin
        exp_cyc += 3 * steps + 3;
      end
      column_ref(pix_m[k], vm_m[k], c, steps, skip, vm_m[k], sum_m[k]);
      if (sum_m[k] > 0) n_spiking++; else n_silent++;
    end
    run(0, cyc);
    expect_eq(cyc, exp_cyc, "frame cycles");
    check_buffers();
  endtask

  task automatic check_buffers();
    for (int k = 0; k < int'(DEPTH); k++) begin
      @(negedge clk);
      sum_raddr = AW'(k);
      @(posedge clk); #1;
      expect_eq(sum_rdata, sum_m[k], $sformatf("sum[%0d]", k));
      checks++;
      if (bank.vm_mem[k] !== vm_m[k]) begin
        failures++;
        if (failures < 15) $display("FAIL state[%0d]: got %h expected %h", k, bank.vm_mem[k], vm_m[k]);
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
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
    // Buffer reset: every potential := v_init, every sum := 0.
    run(1, cyc);
    expect_eq(cyc, DEPTH, "clear cycles");
    for (int k = 0; k < int'(DEPTH); k++) begin
      vm_m[k] = '{v1: c.v_init, v2: c.v_init, v3: c.v_init};
      sum_m[k] = 0;
    end
    check_buffers();
    // Two frames on the same pixels: the second starts from the first's state.
    load_pixels(30);
    frame(c, 5, 0);
    frame(c, 5, 0);
    // New pixels, zero-skipping mode.
    load_pixels(50);
    frame(c, 4, 1);
    // Different Euler factor and more steps.
    c.k_dt = to_f32(0.5);
    load_pixels(20);
    frame(c, 7, 0);
    // The published parameters: every neuron fires in every step.
    frame(PAPER_CFG, 3, 0);
    for (int k = 0; k < int'(DEPTH); k++) expect_eq(sum_m[k], 3, "published set fires every step");
    // count = 0: start is ignored.
    count = '0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    expect_eq(busy, 0, "no work, no busy");
    if (n_skipped == 0 || n_spiking == 0 || n_silent == 0) begin
      failures++;
      $display("FAIL coverage skipped=%0d spiking=%0d silent=%0d", n_skipped, n_spiking, n_silent);
    end
    $display("skipped=%0d spiking=%0d silent=%0d", n_skipped, n_spiking, n_silent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
