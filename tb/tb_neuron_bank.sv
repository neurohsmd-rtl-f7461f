// tb_neuron_bank: checks the three buffers of one lane bank: host pixel
// writes read back on the lane port, lane state and sum writes read back on
// the lane and host ports, the one-cycle read latency, and that a write to
// one entry leaves the others alone.
module tb_neuron_bank;
  import nhsmd_pkg::*;

  localparam int unsigned DEPTH = 37;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic                pix_we = 0, wr_en = 0;
  logic [AW-1:0]       pix_waddr = '0, rd_addr = '0, wr_addr = '0, sum_raddr = '0;
  fp32_t               pix_wdata = '0, pix_rdata;
  vm_state_t           vm_rdata, vm_wdata = '0;
  logic [SUM_BITS-1:0] sum_wdata = '0, sum_rdata;
  int checks = 0, failures = 0;

  neuron_bank #(.DEPTH(DEPTH)) dut (.*);

  function automatic fp32_t pat(int k);      return 32'h4000_0000 + 32'(k * 977); endfunction
  function automatic vm_state_t vpat(int k); return '{v1: 32'(k) * 3, v2: ~32'(k), v3: 32'(k) << 7}; endfunction

  task automatic expect_eq(logic [127:0] got, logic [127:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    // Host fills the pixel buffer; the lane fills state and sums.
    for (int k = 0; k < int'(DEPTH); k++) begin
      pix_we = 1; pix_waddr = AW'(k); pix_wdata = pat(k);
      wr_en = 1; wr_addr = AW'(k); vm_wdata = vpat(k); sum_wdata = SUM_BITS'(k * 5 + 1);
      @(negedge clk);
    end
    pix_we = 0; wr_en = 0;
    // Read back, in a scrambled order, with one cycle of latency.
    for (int n = 0; n < int'(DEPTH); n++) begin
      int k;
      k = (n * 7 + 3) % int'(DEPTH);
      rd_addr = AW'(k); sum_raddr = AW'(DEPTH - 1 - k);
      @(posedge clk); #1;
      expect_eq(128'(pix_rdata), 128'(pat(k)), "pixel");
      expect_eq(128'(vm_rdata), 128'(vpat(k)), "state");
      expect_eq(128'(sum_rdata), 128'((int'(DEPTH) - 1 - k) * 5 + 1), "sum");
      @(negedge clk);
    end
    // Overwrite one entry; its neighbours keep their values.
    wr_en = 1; wr_addr = AW'(10); vm_wdata = '0; sum_wdata = 16'hBEEF;
    @(negedge clk);
    wr_en = 0;
    for (int k = 9; k <= 11; k++) begin
      rd_addr = AW'(k); sum_raddr = AW'(k);
      @(posedge clk); #1;
      expect_eq(128'(vm_rdata), (k == 10) ? 128'(0) : 128'(vpat(k)), "state after overwrite");
      expect_eq(128'(sum_rdata), (k == 10) ? 128'(16'hBEEF) : 128'(k * 5 + 1), "sum after overwrite");
      @(negedge clk);
    end
    // The read port is registered: changing the address does not change the
    // output before the next edge.
    rd_addr = AW'(3);
    @(posedge clk); #1;
    rd_addr = AW'(4); #1;
    expect_eq(128'(pix_rdata), 128'(pat(3)), "registered read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
