// adc_controller: master of the daisy chain of AD boards (160 MHz domain).
//
// Every SAMPLE_DIV cycles (10 kHz at 160 MHz) it raises Conversion Start for
// CONV_PULSE cycles, waits CONV_WAIT cycles for the ADS8568 conversions to
// finish (about 1.7 us; 2 us is allowed), then asserts Chip Select and runs
// the serial clock at clk/SCLK_DIV (20 MHz). Each clock period is low for its
// first half and high for its second; sdi is sampled at the rising edge and
// the boards move to the next bit after the falling edge. The stream begins
// with the MSB of channel 1 of the first board and continues through all
// channels of that board, then those of the next board down the chain:
// N_BOARDS*N_CH*16 bits in all. When the last bit is in, Chip Select drops,
// and valid pulses one cycle with Iout (channel 1) and dI (channel 2) of
// every board on iout/di. Board numbering, conversion start, the 20 MHz
// clock and the MSB-first order follow the original AD board; the wait time,
// the pulse length, the channel assignment and the active-high strobes are
// this design's choices. Nothing starts while run is low.
module adc_controller #(
  parameter int unsigned N_BOARDS   = 4,
  parameter int unsigned N_CH       = 8,
  parameter int unsigned BITS       = 16,
  parameter int unsigned SAMPLE_DIV = 16000,
  parameter int unsigned SCLK_DIV   = 8,
  parameter int unsigned CONV_PULSE = 16,
  parameter int unsigned CONV_WAIT  = 320
) (
  input  logic clk,
  input  logic rst_n,
  input  logic run,
  output logic conv_start,
  output logic sclk,
  output logic cs,
  input  logic sdi,
  output logic [N_BOARDS-1:0][BITS-1:0] iout,
  output logic [N_BOARDS-1:0][BITS-1:0] di,
  output logic valid
);
  localparam int unsigned TOTAL = N_BOARDS * N_CH * BITS;

  typedef enum logic [1:0] {S_IDLE, S_CONV, S_SHIFT, S_DONE} state_e;
  state_e state;

  logic [$clog2(SAMPLE_DIV)-1:0] tick_cnt;
  logic [$clog2(CONV_WAIT+1)-1:0] wait_cnt;
  logic [$clog2(SCLK_DIV)-1:0]   ph;
  logic [$clog2(TOTAL+1)-1:0]    nbits;
  logic [TOTAL-1:0]              shreg;
  logic                          tick;

  // sample-rate timebase
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) tick_cnt <= '0;
    else if (!run) tick_cnt <= '0;
    else if (tick_cnt == SAMPLE_DIV-1) tick_cnt <= '0;
    else tick_cnt <= tick_cnt + 1'b1;
  assign tick = run && (tick_cnt == SAMPLE_DIV-1);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_IDLE; wait_cnt <= '0; ph <= '0; nbits <= '0; shreg <= '0;
      conv_start <= 1'b0; sclk <= 1'b0; cs <= 1'b0; valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      unique case (state)
        S_IDLE: if (tick) begin
          state <= S_CONV; wait_cnt <= '0; conv_start <= 1'b1;
        end
        S_CONV: begin
          wait_cnt <= wait_cnt + 1'b1;
          if (wait_cnt == CONV_PULSE-1) conv_start <= 1'b0;
          if (wait_cnt == CONV_WAIT-1) begin
            state <= S_SHIFT; cs <= 1'b1; ph <= '0; nbits <= '0;
          end
        end
        S_SHIFT: begin
          ph <= (ph == SCLK_DIV-1) ? '0 : ph + 1'b1;
          if (ph == SCLK_DIV/2 - 1) begin
            sclk  <= 1'b1;
            shreg <= {shreg[TOTAL-2:0], sdi};
            nbits <= nbits + 1'b1;
          end
          if (ph == SCLK_DIV-1) begin
            sclk <= 1'b0;
            if (nbits == TOTAL) begin state <= S_DONE; cs <= 1'b0; end
          end
        end
        S_DONE: begin
          valid <= 1'b1; state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end

  // word k = board*N_CH + channel sits at shreg[TOTAL-1-BITS*k -: BITS]
  always_comb
    for (int b = 0; b < N_BOARDS; b++) begin
      iout[b] = shreg[TOTAL-1-BITS*(b*N_CH)   -: BITS];
      di[b]   = shreg[TOTAL-1-BITS*(b*N_CH+1) -: BITS];
    end

  initial assert (CONV_WAIT + 2 + TOTAL*SCLK_DIV < SAMPLE_DIV)
    else $error("read-out does not fit in one sample period");
endmodule
