// cdc_handshake: moves an occasional data word into another clock domain.
//
// On src_valid the word is held in a source-side register and a request bit
// toggles. The destination brings the toggle over with two flip-flops; a
// change of the synchronised toggle marks the held word as stable, so it is
// sampled and dst_valid pulses for one destination cycle. There is no
// acknowledge: the source must not present a new word within about four
// destination cycles of the previous one. The firmware's words come at the
// 10 kHz sampling rate, thousands of cycles apart in every domain.
module cdc_handshake #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             src_clk,
  input  logic             src_rst_n,
  input  logic             src_valid,
  input  logic [WIDTH-1:0] src_data,
  input  logic             dst_clk,
  input  logic             dst_rst_n,
  output logic             dst_valid,
  output logic [WIDTH-1:0] dst_data
);
  logic [WIDTH-1:0] hold;
  logic             tog;
  logic [2:0]       tog_d;

  always_ff @(posedge src_clk or negedge src_rst_n)
    if (!src_rst_n) begin
      hold <= '0; tog <= 1'b0;
    end else if (src_valid) begin
      hold <= src_data; tog <= ~tog;
    end

  always_ff @(posedge dst_clk or negedge dst_rst_n)
    if (!dst_rst_n) begin
      tog_d <= '0; dst_valid <= 1'b0; dst_data <= '0;
    end else begin
      tog_d     <= {tog_d[1:0], tog};
      dst_valid <= tog_d[2] ^ tog_d[1];
      if (tog_d[2] ^ tog_d[1]) dst_data <= hold;
    end
endmodule
