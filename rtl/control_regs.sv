// control_regs: registers through which the processor's user program starts
// and stops the firmware, sets its parameters and reads its state (50 MHz
// bus domain).
//
// Avalon-MM slave, word addresses as in tune_pkg::reg_addr_e, reads return
// one cycle later with avs_readdatavalid, no wait states. Status counters
// count one-cycle pulses from the rest of the firmware (link errors, moved
// cycles, DMA overruns) and saturate at their width. Configuration outputs
// are meant to be changed only while run is low; other domains sample them
// as static values. The original user program starts, stops, sets parameters
// and monitors states, but its register map is not known: this map, and the
// reset values (52000 samples = 5.2 s at 10 kHz per buffer), are this
// design's choices.
module control_regs
  import tune_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [3:0]  avs_address,
  input  logic        avs_read,
  input  logic        avs_write,
  input  logic [31:0] avs_writedata,
  output logic [31:0] avs_readdata,
  output logic        avs_readdatavalid,
  output logic        run,
  output logic        corr_enable,
  output logic [N_DAC-1:0][3:0] dac_sel,
  output logic [3:0][2:0] ddr_sel,
  output logic [31:0] buf_base0,
  output logic [31:0] buf_base1,
  output logic [31:0] hps_base,
  output logic [31:0] max_samples,
  input  logic        dma_busy,
  input  logic        link_err,
  input  logic        dma_overrun,
  input  logic        dma_done,
  input  logic [31:0] dma_len
);
  logic [7:0]  link_err_cnt, overrun_cnt;
  logic [31:0] cycles, last_len;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      run <= 1'b0; corr_enable <= 1'b0;
      dac_sel <= {DAC_SRC_VREF, 4'd8, 4'd4, 4'd0};   // ch3..ch0
      ddr_sel <= {3'd3, 3'd2, 3'd1, 3'd0};
      buf_base0 <= 32'h0000_0000; buf_base1 <= 32'h0100_0000;
      hps_base <= 32'h2000_0000; max_samples <= 32'd52000;
      link_err_cnt <= '0; overrun_cnt <= '0; cycles <= '0; last_len <= '0;
    end else begin
      if (avs_write)
        unique case (avs_address)
          REG_CTRL:      {corr_enable, run} <= avs_writedata[1:0];
          REG_DAC_SEL:   dac_sel     <= avs_writedata[15:0];
          REG_DDR_SEL:   ddr_sel     <= avs_writedata[11:0];
          REG_BUF_BASE0: buf_base0   <= avs_writedata;
          REG_BUF_BASE1: buf_base1   <= avs_writedata;
          REG_HPS_BASE:  hps_base    <= avs_writedata;
          REG_MAX_SAMP:  max_samples <= avs_writedata;
          default: ;
        endcase
      if (link_err    && link_err_cnt != '1) link_err_cnt <= link_err_cnt + 1'b1;
      if (dma_overrun && overrun_cnt  != '1) overrun_cnt  <= overrun_cnt + 1'b1;
      if (dma_done) begin
        if (cycles != '1) cycles <= cycles + 1'b1;
        last_len <= dma_len;
      end
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      avs_readdata <= '0; avs_readdatavalid <= 1'b0;
    end else begin
      avs_readdatavalid <= avs_read;
      unique case (avs_address)
        REG_CTRL:      avs_readdata <= {30'd0, corr_enable, run};
        REG_DAC_SEL:   avs_readdata <= {16'd0, dac_sel};
        REG_DDR_SEL:   avs_readdata <= {20'd0, ddr_sel};
        REG_BUF_BASE0: avs_readdata <= buf_base0;
        REG_BUF_BASE1: avs_readdata <= buf_base1;
        REG_HPS_BASE:  avs_readdata <= hps_base;
        REG_MAX_SAMP:  avs_readdata <= max_samples;
        REG_STATUS:    avs_readdata <= {8'd0, overrun_cnt, link_err_cnt, 7'd0, dma_busy};
        REG_CYCLES:    avs_readdata <= cycles;
        REG_LAST_LEN:  avs_readdata <= last_len;
        default:       avs_readdata <= '0;
      endcase
    end
endmodule
