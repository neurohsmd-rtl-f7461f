// neurohsmd_kernel: the spiking-network device kernel of the NeuroHSMD motion
// detector.
//
// The host subtracts the background from each video frame and hands the
// kernel one foreground value per pixel (fp32). The kernel runs, for every
// pixel, a column of three one-to-one connected LIF neurons (pixel-to-current,
// motion stability, motion detection) for n_steps time steps and returns the
// number of spikes of the motion-detection neuron. The host then filters that
// spike-sum image. Membrane potentials persist between frames, so a neuron's
// response depends on the frames before it.
//
// Structure: LANES (16) copies of snn_lane, each with its own neuron_bank.
// Neuron n is handled by lane n % LANES at entry n / LANES. The 16-way
// parallelism, the single-precision arithmetic, the layer equations and the
// zero-pixel skip of the v2 kernel follow the source; the banked on-chip
// buffers, the command/handshake scheme and the cycle timing are this
// design's own.
//
// Host interface (all synchronous to clk):
//   pix_we/pix_addr/pix_data   write one pixel value into the input buffer
//   sum_addr -> sum_data       read one spike sum, one cycle later
//   cfg, n_neurons, n_steps, skip_zero   run settings, sampled with start/clear
//   clear                      reset buffers: all potentials := cfg.v_init,
//                              all sums := 0, for the first n_neurons neurons
//   start                      process one frame
//   busy                       high while a clear or a frame is in progress
//   done                       one-cycle pulse when busy falls
// start and clear are ignored while busy. Buffers may be accessed only while
// the kernel is idle. A frame takes about (3*n_steps + 3) * ceil(n_neurons/16)
// cycles (fewer with skip_zero and many zero pixels).
module neurohsmd_kernel
  import nhsmd_pkg::*;
#(
  parameter int unsigned N_LANES   = LANES,
  parameter int unsigned N_NEURONS = MAX_NEURONS,
  parameter int unsigned DEPTH     = (N_NEURONS + N_LANES - 1) / N_LANES,
  parameter int unsigned ADDR_W    = $clog2(DEPTH),
  parameter int unsigned NADDR_W   = $clog2(N_NEURONS + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // run control
  input  snn_cfg_t            cfg,
  input  logic [NADDR_W-1:0]  n_neurons,
  input  logic [15:0]         n_steps,
  input  logic                skip_zero,
  input  logic                start,
  input  logic                clear,
  output logic                busy,
  output logic                done,
  // host access to the buffers
  input  logic                pix_we,
  input  logic [NADDR_W-1:0]  pix_addr,
  input  fp32_t               pix_data,
  input  logic [NADDR_W-1:0]  sum_addr,
  output logic [SUM_BITS-1:0] sum_data
);

  // Run settings, held for the duration of a clear or a frame.
  snn_cfg_t           cfg_q;
  logic [15:0]        n_steps_q;
  logic               skip_zero_q;
  logic [NADDR_W-1:0] n_neurons_q;
  logic               go_start, go_clear, busy_q;

  logic [N_LANES-1:0]        lane_busy;
  logic [SUM_BITS-1:0]       lane_sum [N_LANES];
  logic [$clog2(N_LANES)-1:0] sum_lane_q;

  assign go_start = start && !busy;
  assign go_clear = clear && !busy && !start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q       <= PAPER_CFG;
      n_steps_q   <= 16'(DEFAULT_STEPS);
      skip_zero_q <= 1'b0;
      n_neurons_q <= '0;
      busy_q      <= 1'b0;
      sum_lane_q  <= '0;
    end else begin
      if (go_start || go_clear) begin
        cfg_q       <= cfg;
        n_steps_q   <= n_steps;
        skip_zero_q <= skip_zero;
        n_neurons_q <= n_neurons;
      end
      busy_q     <= busy;
      sum_lane_q <= $clog2(N_LANES)'(sum_addr % N_LANES);
    end
  end

  // One delay cycle lets the latched settings reach the lanes before they start.
  logic start_d, clear_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_d <= 1'b0;
      clear_d <= 1'b0;
    end else begin
      start_d <= go_start;
      clear_d <= go_clear;
    end
  end

  assign busy = (|lane_busy) || start_d || clear_d;
  assign done = busy_q && !busy;

  for (genvar l = 0; l < N_LANES; l++) begin : g_lane
    logic [ADDR_W:0]     count;
    logic [ADDR_W-1:0]   rd_addr, wr_addr;
    fp32_t               pix_rdata;
    vm_state_t           vm_rdata, vm_wdata;
    logic                wr_en;
    logic [SUM_BITS-1:0] sum_wdata;
    logic                pix_we_l;

    // Neurons l, l+N_LANES, ... below n_neurons belong to this lane.
    assign count    = (32'(n_neurons_q) > 32'(l))
                    ? (ADDR_W+1)'((32'(n_neurons_q) - 32'(l) + 32'(N_LANES - 1)) / 32'(N_LANES))
                    : '0;
    assign pix_we_l = pix_we && (32'(pix_addr) % 32'(N_LANES) == 32'(l));

    snn_lane #(.DEPTH(DEPTH), .ADDR_W(ADDR_W)) u_lane (
      .clk, .rst_n,
      .start(start_d), .clear(clear_d),
      .cfg(cfg_q), .n_steps(n_steps_q), .skip_zero(skip_zero_q), .count,
      .busy(lane_busy[l]),
      .rd_addr, .pix_rdata, .vm_rdata,
      .wr_en, .wr_addr, .vm_wdata, .sum_wdata
    );

    neuron_bank #(.DEPTH(DEPTH), .ADDR_W(ADDR_W)) u_bank (
      .clk,
      .pix_we(pix_we_l), .pix_waddr(ADDR_W'(pix_addr / N_LANES)), .pix_wdata(pix_data),
      .rd_addr, .pix_rdata, .vm_rdata,
      .wr_en, .wr_addr, .vm_wdata, .sum_wdata,
      .sum_raddr(ADDR_W'(sum_addr / N_LANES)), .sum_rdata(lane_sum[l])
    );
  end

  assign sum_data = lane_sum[sum_lane_q];

  // The host must leave the buffers alone while the kernel runs.
  a_no_pixel_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !pix_we);
  a_neuron_count_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (start || clear) |-> (n_neurons <= NADDR_W'(N_NEURONS)));

endmodule
