// data_selector_dac: chooses what the four analog monitor outputs show
// (result in the 20 MHz domain).
//
// Sources, by 4-bit code: 0..3 Iout1..Iout4, 4..11 dI1..dI8, 12 Vref; other
// codes give 0. Iout1..4 and dI1..4 come from the ADC controller in the
// 160 MHz domain, dI5..dI8 from the fibre receiver and Vref from the tune
// conversion in the 80 MHz domain; each group crosses into the 20 MHz domain
// with a toggle handshake and is held until its next sample. sel holds one
// code per DAC channel and is treated as static. dac_data changes one cycle
// after a new sample of its source appears in this domain. The sources
// printed for this selector in the original block diagram are the 160 MHz
// Iout/dI pairs and the two remote pairs; Vref is offered as well. The
// handshake and the codes are this design's choices.
module data_selector_dac
  import tune_pkg::*;
(
  input  logic clk160,
  input  logic rst160_n,
  input  logic clk80,
  input  logic rst80_n,
  input  logic clk,
  input  logic rst_n,
  input  logic [N_LOCAL-1:0][ADC_BITS-1:0] iout,
  input  logic [N_LOCAL-1:0][ADC_BITS-1:0] di_local,
  input  logic local_valid,
  input  logic [31:0] di56,
  input  logic [31:0] di78,
  input  logic remote_valid,
  input  logic [15:0] vref,
  input  logic vref_valid,
  input  logic [N_DAC-1:0][3:0] sel,
  output logic [N_DAC-1:0][15:0] dac_data
);
  logic [2*N_LOCAL*ADC_BITS-1:0] loc;
  logic [63:0] rem;
  logic [15:0] vr;
  logic [15:0] src [16];

  cdc_handshake #(.WIDTH(2*N_LOCAL*ADC_BITS)) u_loc (
    .src_clk(clk160), .src_rst_n(rst160_n), .src_valid(local_valid), .src_data({iout, di_local}),
    .dst_clk(clk), .dst_rst_n(rst_n), .dst_valid(), .dst_data(loc));
  cdc_handshake #(.WIDTH(64)) u_rem (
    .src_clk(clk80), .src_rst_n(rst80_n), .src_valid(remote_valid), .src_data({di56, di78}),
    .dst_clk(clk), .dst_rst_n(rst_n), .dst_valid(), .dst_data(rem));
  cdc_handshake #(.WIDTH(16)) u_vref (
    .src_clk(clk80), .src_rst_n(rst80_n), .src_valid(vref_valid), .src_data(vref),
    .dst_clk(clk), .dst_rst_n(rst_n), .dst_valid(), .dst_data(vr));

  // loc = {iout[3..0], di[3..0]}, rem = {dI5, dI6, dI7, dI8}
  always_comb begin
    for (int k = 0; k < 16; k++) src[k] = '0;
    for (int k = 0; k < N_LOCAL; k++) begin
      src[k]     = loc[(N_LOCAL+k)*ADC_BITS +: ADC_BITS];
      src[4 + k] = loc[k*ADC_BITS +: ADC_BITS];
    end
    for (int k = 0; k < 4; k++) src[8 + k] = rem[63 - 16*k -: 16];
    src[DAC_SRC_VREF] = vr;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dac_data <= '0;
    else for (int c = 0; c < N_DAC; c++) dac_data[c] <= src[sel[c]];
endmodule
