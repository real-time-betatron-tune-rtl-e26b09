// data_sender_corrector: sends the corrector reference Vref to the current
// regulator of the correction quadrupole (20 MHz domain).
//
// Vref words arrive through a dual-clock FIFO from the 80 MHz conversion
// (first-word-fall-through: in_empty low means in_data is valid, in_pop takes
// it). Each word is sent as one frame on txd, one bit per clock: start bit 0,
// 16 data bits MSB first, an even parity bit and a stop bit 1, then the line
// idles high. A frame takes 19 cycles (0.95 us). busy is high while a frame
// is on the line. That the firmware sends the result to the corrector is the
// original's; the line format is this design's choice.
module data_sender_corrector (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_empty,
  input  logic [15:0] in_data,
  output logic        in_pop,
  output logic        txd,
  output logic        busy
);
  localparam int unsigned FRAME = 19;
  logic [FRAME-1:0] sh;
  logic [4:0]       n;

  assign in_pop = !busy && !in_empty;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      sh <= '1; n <= '0; busy <= 1'b0; txd <= 1'b1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (!in_empty) begin
        // bits leave from the MSB end: start, data, parity, stop
        sh   <= {1'b0, in_data, ^in_data, 1'b1};
        n    <= '0;
        busy <= 1'b1;
      end
    end else begin
      txd <= sh[FRAME-1];
      sh  <= {sh[FRAME-2:0], 1'b1};
      n   <= n + 1'b1;
      if (n == FRAME-1) busy <= 1'b0;
    end
endmodule
