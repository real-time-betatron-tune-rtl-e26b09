// tune_correction_top: firmware of the FPGA block of the master board that
// corrects the betatron tune from the measured magnet currents.
//
// Real-time path: the ADC controller (160 MHz) reads Iout and dI of the four
// local power supplies from the daisy chain of AD boards at 10 kHz; the fibre
// receiver (80 MHz) brings dI5..dI8 of the supplies in the other buildings.
// Both are gathered in the 80 MHz domain, turned into dnu = sum alpha_i dI_i
// with coefficients from the internal memory, and the corrector reference
// Vref crosses a dual-clock FIFO into the 20 MHz domain, where it is sent to
// the corrector's regulator. Monitor path: the Iout/dI pairs, the remote
// pairs and dnu cross dual-clock FIFOs into the 50 MHz bus domain; the DDR3
// selector picks four streams, the writer records one accelerator cycle into
// the FPGA-side DDR3, and the DMA copies each finished cycle into the
// processor's DDR3. A debug path shows four selected signals on the board's
// DAC. The processor reaches the control registers (word addresses 0..15)
// and the internal memory (word addresses 256..511) through the cpu_* Avalon
// slave port, addressed in words.
//
// Clock domains and block list follow the original firmware diagram. The
// DDR3 controllers, the processor and the PLLs are outside: clocks are
// inputs, the two DDR3 ports are Avalon-MM master ports. rst_n is
// asynchronous; each domain gets its own synchronised release. cycle_start
// (accelerator cycle trigger) may be asynchronous; it is synchronised and
// edge-detected here.
// The 50 MHz reset is also used in the assertions of the bus masters, so a
// linter may report it as both synchronous and asynchronous. Only the low
// ALPHA_W bits of each coefficient word are used.
module tune_correction_top
  import tune_pkg::*;
(
  input  logic clk160,
  input  logic clk80,
  input  logic clk50,
  input  logic clk20,
  input  logic rst_n,
  // AD board daisy chain (optical ports)
  output logic adc_conv_start,
  output logic adc_sclk,
  output logic adc_cs,
  input  logic adc_sdi,
  // fibre link from the other buildings
  input  logic link_rxd,
  // corrector
  output logic corr_txd,
  // debug DAC
  output logic dac_sclk,
  output logic dac_sync_n,
  output logic dac_sdi,
  // accelerator cycle trigger
  input  logic cycle_start,
  // FPGA-side DDR3 controller
  output avm_req_t ddr_req,
  input  avm_rsp_t ddr_rsp,
  // processor DDR3 (FPGA-to-HPS bridge)
  output avm_req_t hps_req,
  input  avm_rsp_t hps_rsp,
  // processor access (HPS-to-FPGA bridge), word addresses
  input  logic [8:0]  cpu_address,
  input  logic        cpu_read,
  input  logic        cpu_write,
  input  logic [31:0] cpu_writedata,
  output logic [31:0] cpu_readdata,
  output logic        cpu_readdatavalid,
  output logic        irq_cycle_moved
);
  // ---------------- resets per domain
  logic r160_n, r80_n, r50_n, r20_n;
  reset_sync u_rs160 (.clk(clk160), .arst_n(rst_n), .rst_n(r160_n));
  reset_sync u_rs80  (.clk(clk80),  .arst_n(rst_n), .rst_n(r80_n));
  reset_sync u_rs50  (.clk(clk50),  .arst_n(rst_n), .rst_n(r50_n));
  reset_sync u_rs20  (.clk(clk20),  .arst_n(rst_n), .rst_n(r20_n));

  // ---------------- control registers (50 MHz)
  logic run, corr_enable;
  logic [N_DAC-1:0][3:0] dac_sel;
  logic [3:0][2:0] ddr_sel;
  logic [31:0] buf_base0, buf_base1, hps_base, max_samples;
  logic dma_busy, link_err50, dma_overrun, dma_done;
  logic [31:0] dma_done_words;
  logic [31:0] reg_rdata, mem_rdata;
  logic reg_rvalid, mem_rvalid;
  logic cpu_sel_mem;

  assign cpu_sel_mem = cpu_address[8];

  control_regs u_regs (
    .clk(clk50), .rst_n(r50_n),
    .avs_address(cpu_address[3:0]), .avs_read(cpu_read && !cpu_sel_mem),
    .avs_write(cpu_write && !cpu_sel_mem), .avs_writedata(cpu_writedata),
    .avs_readdata(reg_rdata), .avs_readdatavalid(reg_rvalid),
    .run, .corr_enable, .dac_sel, .ddr_sel, .buf_base0, .buf_base1, .hps_base, .max_samples,
    .dma_busy, .link_err(link_err50), .dma_overrun, .dma_done, .dma_len(dma_done_words));

  assign cpu_readdatavalid = reg_rvalid || mem_rvalid;
  assign cpu_readdata      = mem_rvalid ? mem_rdata : reg_rdata;
  assign irq_cycle_moved   = dma_done;

  logic run160, corr_en80;
  bit_sync u_run160 (.clk(clk160), .rst_n(r160_n), .d(run), .q(run160));
  bit_sync u_cen80  (.clk(clk80),  .rst_n(r80_n),  .d(corr_enable), .q(corr_en80));

  // ---------------- ADC controller (160 MHz)
  logic [N_LOCAL-1:0][ADC_BITS-1:0] iout, di_loc;
  logic adc_valid;
  adc_controller u_adc (
    .clk(clk160), .rst_n(r160_n), .run(run160),
    .conv_start(adc_conv_start), .sclk(adc_sclk), .cs(adc_cs), .sdi(adc_sdi),
    .iout, .di(di_loc), .valid(adc_valid));

  // ---------------- fibre receiver (80 MHz)
  logic [31:0] di56, di78;
  logic rx_valid, rx_err;
  data_receiver u_rx (
    .clk(clk80), .rst_n(r80_n), .rxd(link_rxd),
    .di56, .di78, .valid(rx_valid), .frame_err(rx_err));

  cdc_handshake #(.WIDTH(1)) u_err_cdc (
    .src_clk(clk80), .src_rst_n(r80_n), .src_valid(rx_err), .src_data(1'b1),
    .dst_clk(clk50), .dst_rst_n(r50_n), .dst_valid(link_err50), .dst_data());

  // ---------------- synchronisation and conversion (80 MHz)
  logic [N_DI-1:0][ADC_BITS-1:0] di_all;
  logic all_valid;
  sync_80mhz u_sync (
    .clk160, .rst160_n(r160_n), .clk80, .rst80_n(r80_n),
    .di_local(di_loc), .local_valid(adc_valid),
    .di56, .di78, .remote_valid(rx_valid),
    .di_all, .valid(all_valid));

  logic [$clog2(N_DI)-1:0] coef_addr;
  logic [31:0] coef_word;
  logic signed [31:0] dnu;
  logic signed [15:0] vref;
  logic conv_valid;
  tune_conversion u_conv (
    .clk(clk80), .rst_n(r80_n), .di_all, .in_valid(all_valid),
    .coef_addr, .coef_data(coef_word[ALPHA_W-1:0]), .corr_enable(corr_en80),
    .dnu, .vref, .out_valid(conv_valid));

  internal_memory u_mem (
    .clk_a(clk50), .rst_a_n(r50_n),
    .avs_address(cpu_address[7:0]), .avs_read(cpu_read && cpu_sel_mem),
    .avs_write(cpu_write && cpu_sel_mem), .avs_writedata(cpu_writedata),
    .avs_readdata(mem_rdata), .avs_readdatavalid(mem_rvalid),
    .clk_b(clk80), .addr_b(8'(coef_addr)), .q_b(coef_word));

  // ---------------- corrector path (80 -> 20 MHz)
  logic vref_empty, vref_pop;
  logic [15:0] vref_q;
  async_fifo #(.WIDTH(16)) u_fifo_vref (
    .wclk(clk80), .wrst_n(r80_n), .wr_en(conv_valid), .wdata(vref), .full(),
    .rclk(clk20), .rrst_n(r20_n), .rd_en(vref_pop), .rdata(vref_q), .empty(vref_empty));

  data_sender_corrector u_corr (
    .clk(clk20), .rst_n(r20_n), .in_empty(vref_empty), .in_data(vref_q), .in_pop(vref_pop),
    .txd(corr_txd), .busy());

  // ---------------- debug DAC path (20 MHz)
  logic [N_DAC-1:0][15:0] dac_data;
  data_selector_dac u_dsel (
    .clk160, .rst160_n(r160_n), .clk80, .rst80_n(r80_n), .clk(clk20), .rst_n(r20_n),
    .iout, .di_local(di_loc), .local_valid(adc_valid),
    .di56, .di78, .remote_valid(rx_valid), .vref(vref), .vref_valid(conv_valid),
    .sel(dac_sel), .dac_data);

  data_sender_dac u_dac (
    .clk(clk20), .rst_n(r20_n), .dac_data,
    .sclk(dac_sclk), .sync_n(dac_sync_n), .sdi(dac_sdi), .frame_done());

  // ---------------- monitor FIFOs (-> 50 MHz)
  logic [N_MON-1:0] mon_empty, mon_pop;
  logic [N_MON-1:0][31:0] mon_data;
  for (genvar i = 0; i < N_LOCAL; i++) begin : g_loc_fifo
    async_fifo #(.WIDTH(32)) u_fifo (
      .wclk(clk160), .wrst_n(r160_n), .wr_en(adc_valid), .wdata({iout[i], di_loc[i]}), .full(),
      .rclk(clk50), .rrst_n(r50_n), .rd_en(mon_pop[i]), .rdata(mon_data[i]), .empty(mon_empty[i]));
  end
  async_fifo #(.WIDTH(32)) u_fifo_56 (
    .wclk(clk80), .wrst_n(r80_n), .wr_en(rx_valid), .wdata(di56), .full(),
    .rclk(clk50), .rrst_n(r50_n), .rd_en(mon_pop[4]), .rdata(mon_data[4]), .empty(mon_empty[4]));
  async_fifo #(.WIDTH(32)) u_fifo_78 (
    .wclk(clk80), .wrst_n(r80_n), .wr_en(rx_valid), .wdata(di78), .full(),
    .rclk(clk50), .rrst_n(r50_n), .rd_en(mon_pop[5]), .rdata(mon_data[5]), .empty(mon_empty[5]));
  async_fifo #(.WIDTH(32)) u_fifo_dnu_sel (
    .wclk(clk80), .wrst_n(r80_n), .wr_en(conv_valid), .wdata(dnu), .full(),
    .rclk(clk50), .rrst_n(r50_n), .rd_en(mon_pop[6]), .rdata(mon_data[6]), .empty(mon_empty[6]));

  logic dnu_empty, dnu_pop;
  logic [31:0] dnu_q;
  async_fifo #(.WIDTH(32)) u_fifo_dnu_rec (
    .wclk(clk80), .wrst_n(r80_n), .wr_en(conv_valid), .wdata(dnu), .full(),
    .rclk(clk50), .rrst_n(r50_n), .rd_en(dnu_pop), .rdata(dnu_q), .empty(dnu_empty));

  // ---------------- recording (50 MHz)
  logic [3:0][31:0] sel_data;
  data_selector_ddr3 u_ddrsel (
    .clk(clk50), .rst_n(r50_n), .fifo_empty(mon_empty), .fifo_data(mon_data), .fifo_pop(mon_pop),
    .sel(ddr_sel), .sel_data, .updated());

  logic cyc_s, cyc_d, cyc_pulse;
  bit_sync u_cyc (.clk(clk50), .rst_n(r50_n), .d(cycle_start), .q(cyc_s));
  always_ff @(posedge clk50 or negedge r50_n)
    if (!r50_n) cyc_d <= 1'b0; else cyc_d <= cyc_s;
  assign cyc_pulse = cyc_s && !cyc_d;

  avm_req_t wr_req, dma_rd_req;
  avm_rsp_t wr_rsp, dma_rd_rsp;
  logic rec_done;
  logic [31:0] rec_base, rec_words;
  write_ddr3 u_wr (
    .clk(clk50), .rst_n(r50_n), .run, .cycle_start(cyc_pulse),
    .buf_base0, .buf_base1, .max_samples, .sel_data,
    .dnu_empty, .dnu_data(dnu_q), .dnu_pop,
    .avm_req(wr_req), .avm_rsp(wr_rsp),
    .done(rec_done), .done_base(rec_base), .done_words(rec_words), .recording());

  dma_controller u_dma (
    .clk(clk50), .rst_n(r50_n), .start(rec_done), .src_base(rec_base), .dst_base(hps_base),
    .words(rec_words), .rd_req(dma_rd_req), .rd_rsp(dma_rd_rsp), .wr_req(hps_req), .wr_rsp(hps_rsp),
    .busy(dma_busy), .done(dma_done), .done_words(dma_done_words), .overrun(dma_overrun));

  avalon_arbiter u_arb (
    .clk(clk50), .rst_n(r50_n),
    .m0_req(wr_req), .m0_rsp(wr_rsp), .m1_req(dma_rd_req), .m1_rsp(dma_rd_rsp),
    .s_req(ddr_req), .s_rsp(ddr_rsp));
endmodule
