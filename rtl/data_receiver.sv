// data_receiver: receiver of the fibre link that brings dI5..dI8 from the
// other buildings (80 MHz domain).
//
// The slave board in D3 sends the deviations of its own supplies and those it
// forwards from D1 as one frame per sample: line idle high, a start bit 0,
// N_WORDS*16 data bits MSB first (dI5 first), an even parity bit over the data
// and a stop bit 1, each bit OVERSAMPLE clock cycles long (10 Mb/s at 80 MHz).
// The line is synchronised with two flip-flops; a falling edge in idle starts
// a frame and every bit is sampled in its middle. A good frame updates
// di56 = {dI5,dI6} and di78 = {dI7,dI8} and pulses valid; a bad parity or stop
// bit pulses frame_err and leaves the outputs as they were. The existence of
// the link and the grouping of dI5..dI8 into two pairs follow the original
// system; the line format is this design's choice.
module data_receiver #(
  parameter int unsigned OVERSAMPLE = 8,
  parameter int unsigned N_WORDS    = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rxd,
  output logic [31:0] di56,
  output logic [31:0] di78,
  output logic        valid,
  output logic        frame_err
);
  localparam int unsigned NDATA = N_WORDS * 16;

  typedef enum logic [2:0] {R_IDLE, R_START, R_DATA, R_PAR, R_STOP} state_e;
  state_e state;

  logic [2:0] rx_s;
  logic       rx;
  logic [$clog2(OVERSAMPLE)-1:0] cnt;
  logic [$clog2(NDATA+1)-1:0]    nb;
  logic [NDATA-1:0]              sh;
  logic                          par;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rx_s <= '1;
    else        rx_s <= {rx_s[1:0], rxd};
  assign rx = rx_s[2];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= R_IDLE; cnt <= '0; nb <= '0; sh <= '0; par <= 1'b0;
      di56 <= '0; di78 <= '0; valid <= 1'b0; frame_err <= 1'b0;
    end else begin
      valid <= 1'b0; frame_err <= 1'b0;
      cnt <= (cnt == OVERSAMPLE-1) ? '0 : cnt + 1'b1;
      unique case (state)
        R_IDLE: begin
          cnt <= '0;
          if (!rx) state <= R_START;
        end
        R_START: if (cnt == OVERSAMPLE/2 - 1) begin
          cnt <= '0;
          if (!rx) begin state <= R_DATA; nb <= '0; par <= 1'b0; end
          else state <= R_IDLE;             // glitch, not a start bit
        end
        R_DATA: if (cnt == OVERSAMPLE-1) begin
          sh  <= {sh[NDATA-2:0], rx};
          par <= par ^ rx;
          nb  <= nb + 1'b1;
          if (nb == NDATA-1) state <= R_PAR;
        end
        R_PAR: if (cnt == OVERSAMPLE-1) begin
          par <= par ^ rx;
          state <= R_STOP;
        end
        R_STOP: if (cnt == OVERSAMPLE-1) begin
          state <= R_IDLE;
          if (rx && !par) begin
            di56 <= sh[NDATA-1 -: 32];
            di78 <= sh[NDATA-33 -: 32];
            valid <= 1'b1;
          end else frame_err <= 1'b1;
        end
        default: state <= R_IDLE;
      endcase
    end

  initial assert (N_WORDS == 4) else $error("two output pairs need N_WORDS = 4");
endmodule
