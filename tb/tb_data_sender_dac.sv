// tb_data_sender_dac: drives four changing words into the DAC sender at its
// default 100 kHz update rate (200 cycles of 20 MHz) and checks, with an SPI
// DAC model, that every period delivers four well-formed frames and that
// each DAC channel shows the word latched at the start of the period.
module tb_data_sender_dac;
  logic clk = 0, rst_n = 0, sclk, sync_n, sdi, frame_done;
  logic [3:0][15:0] dac_data, out;
  logic [3:0][15:0] hist [32];
  int frames, bad, checks = 0, failures = 0;

  always #25ns clk = ~clk;

  data_sender_dac dut (.*);
  spi_dac_model u_dac (.sclk, .sync_n, .sdi, .out, .frames, .bad_frames(bad));

  initial begin
    dac_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // new words early in each period; the sender latches them at the
    // next update tick and has sent all four by tick 10 of the period after
    begin
      int f0;
      wait (dut.tick == 10); @(posedge clk);
      f0 = frames;
      for (int p = 0; p < 31; p++) begin
        if (p > 0) begin
          checks++;
          if (frames - f0 != 4 * p) begin failures++; $display("frames %0d in %0d periods", frames - f0, p); end
        end
        if (p > 1) begin
          checks += 4;
          // words set two checks ago were latched at the last-but-one tick
          for (int c = 0; c < 4; c++)
            if (out[c] !== hist[p-2][c]) begin failures++; $display("period %0d ch%0d %h exp %h", p, c, out[c], hist[p-2][c]); end
        end
        for (int c = 0; c < 4; c++) dac_data[c] = 16'($urandom);
        hist[p] = dac_data;
        @(posedge clk);
        wait (dut.tick == 10); @(posedge clk);
      end
    end
    checks++; if (bad != 0) begin failures++; $display("bad frames %0d", bad); end
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
