// snn_lane: one of the kernel's 16 parallel neuron circuits.
//
// A lane walks the entries of its own neuron_bank one after another. For each
// pixel it runs the three-layer spiking network of the motion detector for
// n_steps time steps, in the order of the published kernel loop:
//   layer 1 (pixel-to-current): I = pixel * p2c
//   layer 2 (motion stability): I = sum1 * s2c
//   layer 3 (motion detection): I = sum1 * s2c + sum2 * s2c
// where sumK is the number of spikes layer K has fired so far in this frame.
// Each layer is one leaky integrate-and-fire update (lif_neuron); a spike adds
// one to the layer's sum. The connections are one-to-one: a pixel's layer-3
// neuron hears only that pixel's layer-1 and layer-2 neurons. At the end the
// three potentials go back to the state buffer, where they carry over to the
// next frame, and sum3 goes to the spike-sum buffer.
//
// With skip_zero set (the "v2" kernel), a pixel whose value is not above 0.0
// is not simulated: its sum is written as 0 and its potentials are left as
// they were. A clear pass (the host's buffer reset) writes v_init into all
// three potentials and 0 into the sum of the first `count` entries.
//
// Own choices: one shared LIF datapath evaluated one layer per clock cycle;
// spike sums restart at zero each frame; skipped pixels report a sum of 0.
//
// Timing, per pixel: READ 1 cycle, LOAD 1, RUN 3*n_steps, WRITE 1, so
// 3*n_steps + 3 cycles when simulated and 3 cycles when skipped. A clear
// takes one cycle per entry. start and clear are sampled in IDLE only; busy
// is high from the cycle after either until the lane is idle again.
module snn_lane
  import nhsmd_pkg::*;
#(
  parameter int unsigned DEPTH  = (MAX_NEURONS + LANES - 1) / LANES,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                clear,
  input  snn_cfg_t            cfg,
  input  logic [15:0]         n_steps,
  input  logic                skip_zero,
  input  logic [ADDR_W:0]     count,
  output logic                busy,
  // bank read port
  output logic [ADDR_W-1:0]   rd_addr,
  input  fp32_t               pix_rdata,
  input  vm_state_t           vm_rdata,
  // bank write port
  output logic                wr_en,
  output logic [ADDR_W-1:0]   wr_addr,
  output vm_state_t           vm_wdata,
  output logic [SUM_BITS-1:0] sum_wdata
);

  lane_state_e         state;
  logic [ADDR_W-1:0]   idx;
  logic [15:0]         step;
  logic [1:0]          layer;
  fp32_t               pix;
  vm_state_t           vm;
  logic [SUM_BITS-1:0] s1, s2, s3;

  // ---- layer input currents --------------------------------------------
  fp32_t s1_f, s2_f, i_l1, i_l2, i_l3, i_sel, v_sel, v_new;
  logic  fire, pix_le_zero;

  fp32_from_uint #(.W(SUM_BITS)) u_s1f (.u(s1), .y(s1_f));
  fp32_from_uint #(.W(SUM_BITS)) u_s2f (.u(s2), .y(s2_f));
  fp32_mul u_i1  (.a(pix),  .b(cfg.p2c), .y(i_l1));
  fp32_mul u_i2  (.a(s1_f), .b(cfg.s2c), .y(i_l2));
  fp32_mul u_i3b (.a(s2_f), .b(cfg.s2c), .y(i_l3));
  fp32_t i_l23;
  fp32_add u_i3  (.a(i_l2), .b(i_l3),    .y(i_l23));

  always_comb begin
    unique case (layer)
      2'd0:    begin v_sel = vm.v1; i_sel = i_l1;  end
      2'd1:    begin v_sel = vm.v2; i_sel = i_l2;  end
      default: begin v_sel = vm.v3; i_sel = i_l23; end
    endcase
  end

  lif_neuron u_lif (.v(v_sel), .i_syn(i_sel), .cfg(cfg), .v_next(v_new), .spike(fire));

  // pixel_val > 0.0 is tested on the value just read from the bank.
  fp32_ge u_zero (.a(FP_0_0), .b(pix_rdata), .ge(pix_le_zero));

  // ---- control -------------------------------------------------------------
  wire last_entry = ({1'b0, idx} == count - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= L_IDLE;
      idx   <= '0;
      step  <= '0;
      layer <= '0;
      pix   <= '0;
      vm    <= '0;
      s1    <= '0;
      s2    <= '0;
      s3    <= '0;
    end else begin
      unique case (state)
        L_IDLE: begin
          idx <= '0;
          if (count != '0) begin
            if (clear)      state <= L_CLEAR;
            else if (start) state <= L_READ;
          end
        end
        L_CLEAR: begin
          idx <= idx + 1'b1;
          if (last_entry) state <= L_IDLE;
        end
        L_READ: state <= L_LOAD;
        L_LOAD: begin
          pix   <= pix_rdata;
          vm    <= vm_rdata;
          s1    <= '0;
          s2    <= '0;
          s3    <= '0;
          step  <= '0;
          layer <= '0;
          if ((skip_zero && pix_le_zero) || n_steps == '0) state <= L_WRITE;
          else                                              state <= L_RUN;
        end
        L_RUN: begin
          unique case (layer)
            2'd0:    begin vm.v1 <= v_new; if (fire) s1 <= s1 + 1'b1; end
            2'd1:    begin vm.v2 <= v_new; if (fire) s2 <= s2 + 1'b1; end
            default: begin vm.v3 <= v_new; if (fire) s3 <= s3 + 1'b1; end
          endcase
          if (layer == 2'd2) begin
            layer <= '0;
            step  <= step + 1'b1;
            if (step == n_steps - 1'b1) state <= L_WRITE;
          end else begin
            layer <= layer + 1'b1;
          end
        end
        L_WRITE: begin
          idx <= idx + 1'b1;
          if (last_entry) state <= L_IDLE;
          else            state <= L_READ;
        end
        default: state <= L_IDLE;
      endcase
    end
  end

  assign busy      = (state != L_IDLE);
  assign rd_addr   = idx;
  assign wr_en     = (state == L_WRITE) || (state == L_CLEAR);
  assign wr_addr   = idx;
  assign vm_wdata  = (state == L_CLEAR) ? '{v1: cfg.v_init, v2: cfg.v_init, v3: cfg.v_init} : vm;
  assign sum_wdata = (state == L_CLEAR) ? '0 : s3;

  // A lane never runs past the entries it was given.
  a_idx_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> ({1'b0, idx} < count));

endmodule
