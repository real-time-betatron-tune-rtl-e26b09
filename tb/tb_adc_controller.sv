// tb_adc_controller: runs the ADC controller at its default 160 MHz timing
// against a model of four daisy-chained AD boards and checks, for five
// samples, the Iout and dI codes of every board, that the 20 MHz clock and
// the 10 kHz sample period (16000 cycles) are respected, and that Chip
// Select never rises before the 1.7 us conversion is over.
module tb_adc_controller;
  localparam int NB = 4, NC = 8;
  logic clk = 0, rst_n = 0, run = 0;
  logic conv_start, sclk, cs, sdi, valid;
  logic [NB-1:0][15:0] iout, di;
  logic [NB*NC-1:0][15:0] values;
  int early, convs;
  int checks = 0, failures = 0, nsamp = 0;
  longint cyc = 0, last_valid = -1;

  always #3.125ns clk = ~clk;
  always @(posedge clk) cyc++;

  adc_controller dut (.clk, .rst_n, .run, .conv_start, .sclk, .cs, .sdi, .iout, .di, .valid);
  ad_chain_model #(.N_BOARDS(NB), .N_CH(NC)) u_ad (.conv_start, .sclk, .cs, .sdo(sdi), .values,
    .early_reads(early), .conversions(convs));

  // new random codes for every board and channel after each conversion start
  always @(negedge conv_start) for (int k = 0; k < NB*NC; k++) values[k] = 16'($urandom);
  initial for (int k = 0; k < NB*NC; k++) values[k] = 16'($urandom);

  // serial clock period: 8 cycles of 160 MHz = 20 MHz
  realtime t_rise = 0;
  always @(posedge sclk) begin
    if (t_rise != 0 && cs) checks++;
    if (t_rise != 0 && cs && (($realtime - t_rise) < 49.9ns || ($realtime - t_rise) > 50.1ns)) begin
      failures++; $display("sclk period %t", $realtime - t_rise);
    end
    t_rise = $realtime;
  end
  always @(negedge cs) t_rise = 0;

  logic [NB*NC-1:0][15:0] expect_v;
  always @(posedge conv_start) expect_v = values;

  always @(posedge clk) if (valid) begin
    nsamp++;
    for (int b = 0; b < NB; b++) begin
      checks += 2;
      if (iout[b] !== expect_v[b*NC])   begin failures++; $display("iout[%0d] %h exp %h", b, iout[b], expect_v[b*NC]); end
      if (di[b]   !== expect_v[b*NC+1]) begin failures++; $display("di[%0d] %h exp %h", b, di[b], expect_v[b*NC+1]); end
    end
    if (last_valid >= 0) begin
      checks++;
      if (cyc - last_valid != 16000) begin failures++; $display("period %0d", cyc - last_valid); end
    end
    last_valid = cyc;
  end

  initial begin
    repeat (5) @(posedge clk); rst_n = 1;
    repeat (5) @(posedge clk); run = 1;
    wait (nsamp == 5);
    checks++; if (early != 0) begin failures++; $display("chip select before conversion end: %0d", early); end
    checks++; if (convs != 5) begin failures++; $display("conversions %0d", convs); end
    // stop: no more conversions while run is low
    run = 0;
    repeat (40000) @(posedge clk);
    checks++; if (convs != 5) begin failures++; $display("converted while stopped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
