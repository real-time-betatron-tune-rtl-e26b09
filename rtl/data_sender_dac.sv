// data_sender_dac: drives the board's 4-channel 16-bit DAC that gives the
// analog monitor outputs for debugging (20 MHz domain).
//
// Every UPDATE_DIV cycles (100 kHz at 20 MHz) the four words on dac_data are
// latched and sent one channel after another as SPI frames: sync_n low for
// 24 bits, word {channel[1:0], 6'b0, data[15:0]} MSB first, sclk = clk/2 with
// sdi changing on the falling edge and valid at the rising edge, and sync_n
// high for two cycles between frames. The four frames take 200 cycles from
// the update tick, exactly one update period. The 16-bit, 100 kHz DAC is the original board's; the part is
// not named, so this generic frame is this design's choice.
module data_sender_dac
  import tune_pkg::*;
#(
  parameter int unsigned UPDATE_DIV = 200
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [N_DAC-1:0][15:0] dac_data,
  output logic sclk,
  output logic sync_n,
  output logic sdi,
  output logic frame_done
);
  localparam int unsigned FBITS = 24;

  logic [$clog2(UPDATE_DIV)-1:0] tick;
  logic [N_DAC-1:0][15:0] lat;
  logic [1:0] ch;
  logic [FBITS-1:0] sh;
  logic [5:0] n;          // half-bit counter within a frame
  logic [1:0] gap;
  logic active, sending;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) tick <= '0;
    else tick <= (tick == UPDATE_DIV-1) ? '0 : tick + 1'b1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      lat <= '0; ch <= '0; sh <= '0; n <= '0; gap <= '0; active <= 1'b0; sending <= 1'b0;
      sclk <= 1'b0; sync_n <= 1'b1; sdi <= 1'b0; frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (tick == 0 && !active) begin
        lat <= dac_data; ch <= '0; active <= 1'b1; sending <= 1'b1; n <= '0;
        sh <= {2'd0, 6'd0, dac_data[0]};
        sync_n <= 1'b0; sdi <= 1'b0; sclk <= 1'b0;
      end else if (active && sending) begin
        // even n: present bit (falling edge), odd n: rising edge
        n <= n + 1'b1;
        if (!n[0]) begin
          sclk <= 1'b0; sdi <= sh[FBITS-1]; sh <= {sh[FBITS-2:0], 1'b0};
        end else begin
          sclk <= 1'b1;
        end
        if (n == 2*FBITS-1) begin sending <= 1'b0; gap <= '0; end
      end else if (active) begin
        sclk <= 1'b0; sync_n <= 1'b1; gap <= gap + 1'b1;
        if (ch == 2'(N_DAC-1)) begin
          frame_done <= 1'b1; active <= 1'b0;      // last frame: no gap needed
        end else if (gap == 2'd1) begin
          frame_done <= 1'b1;
          begin
            ch <= ch + 1'b1; n <= '0; sending <= 1'b1; sync_n <= 1'b0;
            sh <= {2'(ch + 1'b1), 6'd0, lat[ch + 1'b1]};
          end
        end
      end
    end

  initial assert (N_DAC * (2*FBITS + 2) <= UPDATE_DIV) else $error("DAC frames do not fit in one update period");
endmodule
