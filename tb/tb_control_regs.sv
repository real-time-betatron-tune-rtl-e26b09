// tb_control_regs: checks reset values, write and read-back of every
// writable register, the outputs that follow them, and the status counters
// (link errors, DMA overruns, moved cycles, last length).
module tb_control_regs;
  import tune_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] avs_address = 0;
  logic avs_read = 0, avs_write = 0, avs_readdatavalid;
  logic [31:0] avs_writedata = 0, avs_readdata;
  logic run, corr_enable;
  logic [N_DAC-1:0][3:0] dac_sel;
  logic [3:0][2:0] ddr_sel;
  logic [31:0] buf_base0, buf_base1, hps_base, max_samples;
  logic dma_busy = 0, link_err = 0, dma_overrun = 0, dma_done = 0;
  logic [31:0] dma_len = 0;
  int checks = 0, failures = 0;

  always #10ns clk = ~clk;
  control_regs dut (.*);

  task automatic wr(input int a, input logic [31:0] d);
    @(posedge clk); avs_write <= 1; avs_address <= 4'(a); avs_writedata <= d;
    @(posedge clk); avs_write <= 0;
  endtask
  task automatic rd_check(input int a, input logic [31:0] e);
    @(posedge clk); avs_read <= 1; avs_address <= 4'(a);
    @(posedge clk); avs_read <= 0;
    @(negedge clk);
    checks++;
    if (!avs_readdatavalid || avs_readdata !== e) begin
      failures++; $display("reg %0d = %h exp %h", a, avs_readdata, e);
    end
  endtask
  task automatic pulses(input int nl, input int no, input int nd);
    for (int i = 0; i < 5; i++) begin
      @(posedge clk);
      link_err <= (i < nl); dma_overrun <= (i < no); dma_done <= (i < nd);
      @(posedge clk);
      link_err <= 0; dma_overrun <= 0; dma_done <= 0;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    rd_check(REG_MAX_SAMP, 52000);
    rd_check(REG_CTRL, 0);
    rd_check(REG_DDR_SEL, {20'd0, 3'd3, 3'd2, 3'd1, 3'd0});
    wr(REG_CTRL, 3);
    wr(REG_DAC_SEL, 32'h0000_4c5a);
    wr(REG_DDR_SEL, 32'h0000_0bad);
    wr(REG_BUF_BASE0, 32'h1234_0000);
    wr(REG_BUF_BASE1, 32'h5678_0000);
    wr(REG_HPS_BASE, 32'h3000_0000);
    wr(REG_MAX_SAMP, 32'd24800);
    rd_check(REG_CTRL, 3);
    rd_check(REG_DAC_SEL, 32'h4c5a);
    rd_check(REG_DDR_SEL, 32'hbad);
    rd_check(REG_BUF_BASE0, 32'h1234_0000);
    rd_check(REG_BUF_BASE1, 32'h5678_0000);
    rd_check(REG_HPS_BASE, 32'h3000_0000);
    rd_check(REG_MAX_SAMP, 24800);
    checks += 4;
    if (!run || !corr_enable) begin failures++; $display("ctrl outputs"); end
    if (dac_sel !== 16'h4c5a || ddr_sel !== 12'hbad) begin failures++; $display("sel outputs"); end
    if (buf_base0 !== 32'h1234_0000 || buf_base1 !== 32'h5678_0000) begin failures++; $display("base outputs"); end
    if (hps_base !== 32'h3000_0000 || max_samples !== 24800) begin failures++; $display("hps/max outputs"); end
    dma_len = 32'd777;
    pulses(5, 2, 3);
    dma_busy = 1;
    rd_check(REG_STATUS, {8'd0, 8'd2, 8'd5, 8'd1});
    rd_check(REG_CYCLES, 3);
    rd_check(REG_LAST_LEN, 777);
    wr(REG_CTRL, 0);
    @(negedge clk);
    checks++; if (run || corr_enable) begin failures++; $display("stop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
