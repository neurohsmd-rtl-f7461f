// neuron_bank: one lane's slice of the kernel's data buffers.
//
// The kernel keeps, for every pixel, its input value, the membrane potentials
// of the three neuron layers (which persist from frame to frame) and the
// spike sum of the motion-detection layer. Neuron n lives in lane n % LANES at
// entry n / LANES, so the 16 lanes never contend for a bank. Each buffer is a
// simple dual-port memory with one write and one registered read port:
//   pixels : written by the host, read by the lane;
//   state  : read and written by the lane;
//   sums   : written by the lane, read by the host.
// In the published system these buffers are OpenCL global buffers in board
// memory; holding them on chip, and the one-lane-per-bank layout, are this
// design's choices.
//
// Timing: writes take effect at the clock edge; read data appear one cycle
// after the address. Contents are not reset: the lane's clear pass writes the
// state and sum buffers, and the host writes the pixels.
module neuron_bank
  import nhsmd_pkg::*;
#(
  parameter int unsigned DEPTH  = (MAX_NEURONS + LANES - 1) / LANES,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic                clk,
  // pixel buffer
  input  logic                pix_we,
  input  logic [ADDR_W-1:0]   pix_waddr,
  input  fp32_t               pix_wdata,
  // lane read of pixel and state
  input  logic [ADDR_W-1:0]   rd_addr,
  output fp32_t               pix_rdata,
  output vm_state_t           vm_rdata,
  // lane write of state and spike sum
  input  logic                wr_en,
  input  logic [ADDR_W-1:0]   wr_addr,
  input  vm_state_t           vm_wdata,
  input  logic [SUM_BITS-1:0] sum_wdata,
  // host read of spike sums
  input  logic [ADDR_W-1:0]   sum_raddr,
  output logic [SUM_BITS-1:0] sum_rdata
);

  fp32_t               pix_mem [DEPTH];
  vm_state_t           vm_mem  [DEPTH];
  logic [SUM_BITS-1:0] sum_mem [DEPTH];

  always_ff @(posedge clk) begin
    if (pix_we) pix_mem[pix_waddr] <= pix_wdata;
    pix_rdata <= pix_mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en) vm_mem[wr_addr] <= vm_wdata;
    vm_rdata <= vm_mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en) sum_mem[wr_addr] <= sum_wdata;
    sum_rdata <= sum_mem[sum_raddr];
  end

endmodule
