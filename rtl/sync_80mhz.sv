// sync_80mhz: collects the eight current deviations in the 80 MHz domain.
//
// dI1..dI4 are read by the ADC controller in the 160 MHz domain; they are
// carried into the 80 MHz domain with a toggle handshake (cdc_handshake).
// dI5..dI8 come from the fibre receiver, already in this domain, and are kept
// in registers holding the latest good frame. Every local sample releases one
// aligned set di_all = {dI1..dI8} (element 0 is dI1) with a one-cycle valid,
// five cycles after local_valid. The block and its place between the
// receivers and the tune conversion follow the original firmware; its inside
// (handshake for the local words, latest-value registers for the remote ones)
// is this design's choice.
module sync_80mhz
  import tune_pkg::*;
(
  input  logic clk160,
  input  logic rst160_n,
  input  logic clk80,
  input  logic rst80_n,
  input  logic [N_LOCAL-1:0][ADC_BITS-1:0] di_local,
  input  logic local_valid,
  input  logic [31:0] di56,
  input  logic [31:0] di78,
  input  logic remote_valid,
  output logic [N_DI-1:0][ADC_BITS-1:0] di_all,
  output logic valid
);
  logic [N_LOCAL-1:0][ADC_BITS-1:0] loc80;
  logic loc80_v;
  logic [31:0] r56, r78;

  cdc_handshake #(.WIDTH(N_LOCAL*ADC_BITS)) u_cdc (
    .src_clk(clk160), .src_rst_n(rst160_n), .src_valid(local_valid), .src_data(di_local),
    .dst_clk(clk80),  .dst_rst_n(rst80_n),  .dst_valid(loc80_v),    .dst_data(loc80));

  always_ff @(posedge clk80 or negedge rst80_n)
    if (!rst80_n) begin
      r56 <= '0; r78 <= '0; di_all <= '0; valid <= 1'b0;
    end else begin
      if (remote_valid) begin r56 <= di56; r78 <= di78; end
      valid <= loc80_v;
      if (loc80_v) begin
        for (int i = 0; i < N_LOCAL; i++) di_all[i] <= loc80[i];
        di_all[4] <= r56[31:16];
        di_all[5] <= r56[15:0];
        di_all[6] <= r78[31:16];
        di_all[7] <= r78[15:0];
      end
    end
endmodule
