// tb_tune_correction_top: end-to-end test of the whole firmware at its
// default sizes and rates (10 kHz sampling, 160/80/50/20 MHz clocks).
//
// Around the top sit a model of the four daisy-chained AD boards, a
// transmitter for the fibre frames of dI5..dI8 (one per sample period, sent
// half a period after the local conversion), two memory models for the two
// DDR3 ports, an SPI DAC model, a decoder of the corrector line and a CPU
// port driver. The processor's part is played by the test: it loads alpha_1..8
// into the internal memory and sets the registers.
//
// Checked: every Vref frame on the corrector line against sum(alpha_i dI_i)
// computed here from the model's codes (zero while the correction is off);
// the records of every accelerator cycle copied into the processor's DDR3
// (dnu and the four selected {Iout, dI} words of the same sample); the DAC
// outputs; the status registers. Mechanisms that must happen at least once:
// correction off and on, a corrupted fibre frame, a buffer closed by
// max_samples, a buffer closed by the next cycle trigger, a DMA transfer, a
// DMA start refused while busy, waitrequest stalls on the DDR3 port.
module tb_tune_correction_top;
  import tune_pkg::*;
  localparam int NB = 4, NC = 8;
  logic clk160 = 0, clk80 = 0, clk50 = 0, clk20 = 0, rst_n = 0;
  logic adc_conv_start, adc_sclk, adc_cs, adc_sdi, link_rxd = 1, corr_txd;
  logic dac_sclk, dac_sync_n, dac_sdi, cycle_start = 0, irq_cycle_moved;
  avm_req_t ddr_req, hps_req;
  avm_rsp_t ddr_rsp, hps_rsp;
  logic [8:0] cpu_address = 0;
  logic cpu_read = 0, cpu_write = 0, cpu_readdatavalid;
  logic [31:0] cpu_writedata = 0, cpu_readdata;

  always #3.125ns clk160 = ~clk160;
  always #6.25ns  clk80  = ~clk80;
  always #10ns    clk50  = ~clk50;
  always #25ns    clk20  = ~clk20;

  tune_correction_top dut (.*);

  // ---------------- models
  logic [NB*NC-1:0][15:0] values;
  int early, convs, dnw, dnr, hnw, hnr, dac_frames, dac_bad;
  logic [3:0][15:0] dac_out;
  ad_chain_model #(.N_BOARDS(NB), .N_CH(NC)) u_ad (.conv_start(adc_conv_start), .sclk(adc_sclk),
    .cs(adc_cs), .sdo(adc_sdi), .values, .early_reads(early), .conversions(convs));
  avalon_mem_model #(.WAIT_PCT(30), .READ_LAT(5)) u_ddr (.clk(clk50), .rst_n, .req(ddr_req), .rsp(ddr_rsp), .n_writes(dnw), .n_reads(dnr));
  avalon_mem_model #(.WAIT_PCT(20), .READ_LAT(2)) u_hps (.clk(clk50), .rst_n, .req(hps_req), .rsp(hps_rsp), .n_writes(hnw), .n_reads(hnr));
  spi_dac_model u_dac (.sclk(dac_sclk), .sync_n(dac_sync_n), .sdi(dac_sdi), .out(dac_out), .frames(dac_frames), .bad_frames(dac_bad));

  int checks = 0, failures = 0;
  // mechanism counters
  int n_corr_off = 0, n_corr_on = 0, n_link_err = 0, n_close_max = 0, n_close_trig = 0;
  int n_dma = 0, n_overrun = 0, n_stall = 0;

  // ---------------- expected values per local sample
  logic signed [17:0] alpha [N_DI];
  logic [31:0] rem56 = 0, rem78 = 0;        // last frame fully sent
  logic corr_on = 0;
  localparam int MAXS = 64;
  longint exp_dnu [MAXS];
  logic [15:0] exp_vref [MAXS];
  logic [NB-1:0][31:0] exp_loc [MAXS];
  int nsamp = 0;

  always @(negedge adc_conv_start) for (int k = 0; k < NB*NC; k++) values[k] = 16'($urandom);
  initial for (int k = 0; k < NB*NC; k++) values[k] = 16'($urandom);

  always @(negedge adc_cs) if (nsamp < MAXS) begin
    longint s, sh;
    logic [15:0] d [N_DI];
    for (int b = 0; b < NB; b++) d[b] = u_ad.latched[b*NC+1];
    d[4] = rem56[31:16]; d[5] = rem56[15:0]; d[6] = rem78[31:16]; d[7] = rem78[15:0];
    s = 0;
    for (int i = 0; i < N_DI; i++) s += longint'($signed(d[i])) * longint'(alpha[i]);
    sh = s >>> 15;
    exp_dnu[nsamp] = s;
    exp_vref[nsamp] = !corr_on ? 16'd0 : (sh > 32767 ? 16'h7fff : (sh < -32768 ? 16'h8000 : 16'(sh)));
    for (int b = 0; b < NB; b++) exp_loc[nsamp][b] = {u_ad.latched[b*NC], u_ad.latched[b*NC+1]};
    if (corr_on) n_corr_on++; else n_corr_off++;
    nsamp++;
  end

  // ---------------- fibre transmitter: one frame half a period after each conversion
  task automatic send_frame(input logic [63:0] w, input bit bad);
    logic p;
    p = ^w ^ bad;
    link_rxd = 0; #100ns;
    for (int i = 63; i >= 0; i--) begin link_rxd = w[i]; #100ns; end
    link_rxd = p; #100ns;
    link_rxd = 1; #100ns;
  endtask
  int nframe = 0;
  always @(posedge adc_conv_start) begin
    logic [63:0] w;
    bit bad;
    #50us;
    w = {$urandom, $urandom};
    bad = (nframe == 6);
    send_frame(w, bad);
    if (bad) n_link_err++;
    else begin rem56 = w[63:32]; rem78 = w[31:0]; end
    nframe++;
  end

  // ---------------- corrector line decoder
  int nvref = 0;
  initial begin
    logic [17:0] f;
    wait (rst_n);
    forever begin
      @(posedge clk20);
      if (corr_txd === 1'b0) begin
        for (int i = 17; i >= 0; i--) begin @(posedge clk20); f[i] = corr_txd; end
        checks += 2;
        if (f[1] !== ^f[17:2] || f[0] !== 1'b1) begin failures++; $display("corrector frame format"); end
        if (nvref < nsamp && f[17:2] !== exp_vref[nvref]) begin
          failures++; $display("Vref %0d: %h exp %h", nvref, f[17:2], exp_vref[nvref]);
        end
        nvref++;
      end
    end
  end

  always @(posedge clk50) if (rst_n) begin
    if (ddr_req.write && ddr_rsp.waitrequest) n_stall++;
    if (dut.u_dma.overrun) n_overrun++;
    if (dut.u_wr.done) begin
      if (dut.u_wr.done_words == REC_WORDS * 8) n_close_max++;
      else if (dut.u_wr.recording) n_close_trig++;   // still recording: reopened by a trigger
    end
  end

  // ---------------- CPU port
  task automatic cpu_wr(input int a, input logic [31:0] d);
    @(negedge clk50); cpu_address = 9'(a); cpu_writedata = d; cpu_write = 1;
    @(negedge clk50); cpu_write = 0;
  endtask
  task automatic cpu_rd(input int a, output logic [31:0] d);
    @(negedge clk50); cpu_address = 9'(a); cpu_read = 1;
    @(negedge clk50); cpu_read = 0;
    d = cpu_readdata;
    checks++;
    if (!cpu_readdatavalid) begin failures++; $display("no read data"); end
  endtask

  task automatic wait_samples(input int n);
    int s0;
    s0 = nsamp;
    wait (nsamp >= s0 + n);
  endtask

  task automatic trig;
    @(negedge clk50); cycle_start = 1;
    repeat (4) @(negedge clk50); cycle_start = 0;
  endtask

  // records copied to the processor's DDR3 by one DMA transfer
  int hps_done_words;
  task automatic check_moved(input int words);
    int k;
    logic [31:0] dnu_w;
    checks++;
    if (words % REC_WORDS != 0 || words == 0) begin failures++; $display("moved %0d words", words); return; end
    for (int r = 0; r < words / REC_WORDS; r++) begin
      dnu_w = u_hps.peek(32'h2000_0000 + 4*(REC_WORDS*r + 4));
      k = -1;
      for (int i = 0; i < nsamp; i++) if (32'(exp_dnu[i]) == dnu_w) k = i;
      checks++;
      if (k < 0) begin failures++; $display("record %0d: dnu %h not a sample", r, dnu_w); continue; end
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (u_hps.peek(32'h2000_0000 + 4*(REC_WORDS*r + b)) !== exp_loc[k][b]) begin
          failures++; $display("record %0d word %0d: %h exp %h", r, b, u_hps.peek(32'h2000_0000 + 4*(REC_WORDS*r + b)), exp_loc[k][b]);
        end
      end
    end
  endtask

  initial begin
    logic [31:0] d;
    int moved0;
    for (int i = 0; i < N_DI; i++) alpha[i] = 18'($urandom_range(0, 6000)) - 18'sd3000;
    #100ns rst_n = 1;
    repeat (5) @(negedge clk50);
    // load coefficients and check one
    for (int i = 0; i < N_DI; i++) cpu_wr(256 + i, 32'(alpha[i]));
    cpu_rd(256 + 3, d);
    checks++; if (d[17:0] !== alpha[3]) begin failures++; $display("alpha readback"); end
    cpu_wr(REG_MAX_SAMP, 8);
    cpu_wr(REG_HPS_BASE, 32'h2000_0000);
    cpu_wr(REG_CTRL, 1);                       // run, correction off
    wait_samples(3);
    #60us;
    corr_on = 1; cpu_wr(REG_CTRL, 3);          // correction on
    wait_samples(2);
    #60us;
    // cycle 1: closed by max_samples (8), moved by DMA
    moved0 = hnw;
    trig();
    wait_samples(10);
    #60us;
    check_moved(hnw - moved0);
    // cycle 2: closed by the next trigger after 3 samples
    trig();
    wait_samples(3);
    #60us;
    moved0 = hnw;
    trig();                                    // closes cycle 2, opens cycle 3
    #20us;
    check_moved(hnw - moved0);
    n_dma = 0;
    cpu_rd(REG_CYCLES, d); n_dma = int'(d);
    // cycle 3 closed by a trigger while its DMA... closed again at once: refused start
    wait_samples(2);
    #60us;
    trig();                                    // closes cycle 3 (2 samples): DMA starts
    repeat (20) @(negedge clk50);
    trig();                                    // closes the empty cycle 4 while DMA busy
    #20us;
    corr_on = 0; cpu_wr(REG_CTRL, 0);
    #150us;
    // DAC: channel 1 shows dI1, channel 3 shows dI5 of the latest values
    checks += 3;
    if (dac_out[1] !== u_ad.latched[1]) begin failures++; $display("DAC ch1 %h exp %h", dac_out[1], u_ad.latched[1]); end
    if (dac_out[2] !== rem56[31:16]) begin failures++; $display("DAC ch2 %h exp %h", dac_out[2], rem56[31:16]); end
    if (dac_bad != 0) begin failures++; $display("bad DAC frames"); end
    // status
    cpu_rd(REG_STATUS, d);
    checks += 2;
    if (d[15:8] != 8'(n_link_err)) begin failures++; $display("link errors %0d exp %0d", d[15:8], n_link_err); end
    if (d[23:16] != 8'(n_overrun)) begin failures++; $display("overruns %0d exp %0d", d[23:16], n_overrun); end
    checks += 2;
    if (nvref != nsamp) begin failures++; $display("Vref frames %0d samples %0d", nvref, nsamp); end
    if (early != 0) begin failures++; $display("ADC read before conversion end"); end
    // every mechanism must have happened
    checks += 8;
    if (n_corr_off == 0)   begin failures++; $display("never corrector off"); end
    if (n_corr_on == 0)    begin failures++; $display("never corrector on"); end
    if (n_link_err == 0)   begin failures++; $display("never link error"); end
    if (n_close_max == 0)  begin failures++; $display("never closed by max_samples"); end
    if (n_close_trig == 0) begin failures++; $display("never closed by trigger"); end
    if (n_dma < 2)         begin failures++; $display("DMA transfers %0d", n_dma); end
    if (n_overrun == 0)    begin failures++; $display("never DMA overrun"); end
    if (n_stall == 0)      begin failures++; $display("never DDR3 stall"); end
    $display("samples=%0d vref_frames=%0d corr_off=%0d corr_on=%0d link_err=%0d close_max=%0d close_trig=%0d dma=%0d overrun=%0d stalls=%0d",
             nsamp, nvref, n_corr_off, n_corr_on, n_link_err, n_close_max, n_close_trig, n_dma, n_overrun, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms; failures++;
    $display("watchdog: samples=%0d", nsamp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
