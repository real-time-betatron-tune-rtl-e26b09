// spi_dac_model: behavioural model (not synthesizable) of a 4-channel SPI
// DAC taking 24-bit frames {channel[1:0], 6'b0, data[15:0]} MSB first,
// shifted in on rising sclk while sync_n is low and applied when sync_n
// rises. Frames of another length count in bad_frames.
module spi_dac_model (
  input  logic sclk,
  input  logic sync_n,
  input  logic sdi,
  output logic [3:0][15:0] out,
  output int   frames,
  output int   bad_frames
);
  logic [23:0] sh;
  int n;
  initial begin out = '0; frames = 0; bad_frames = 0; n = 0; sh = '0; end
  always @(negedge sync_n) n = 0;
  always @(posedge sclk) if (!sync_n) begin sh = {sh[22:0], sdi}; n++; end
  always @(posedge sync_n) begin
    if (n == 24) begin out[sh[23:22]] = sh[15:0]; frames++; end
    else if (n != 0) bad_frames++;
  end
endmodule
