// tune_conversion: current-to-tune conversion (80 MHz domain).
//
// Computes the predicted tune displacement dnu = sum_{i=1..8} alpha_i * dI_i,
// the linear model of the original system whose coefficients alpha_i come
// from the optics model of the ring and are kept in the internal memory.
// One multiplier is shared over the eight terms: on in_valid the eight dI are
// latched, coefficient i is read at coef_addr = i (memory with one cycle read
// latency) and its product is added one cycle later, so out_valid follows
// in_valid by N_DI+2 cycles (it is high in the
// (N_DI+2)th cycle after the edge that takes in_valid); 8000 cycles are available per 10 kHz sample.
// dI are signed 16-bit ADC codes, alpha_i signed ALPHA_W-bit numbers. dnu is
// the full sum saturated to 32 bits and goes to the monitor recording; Vref,
// the word sent to the corrector, is the sum shifted right by VREF_SHIFT
// (alpha read as a fixed-point gain with VREF_SHIFT fraction bits) and
// saturated to 16 bits. With corr_enable low Vref is forced to zero while dnu
// is still produced, so the prediction can be recorded with the corrector off.
// The formula is the original's; the serial MAC, the number formats and the
// enable are this design's choices.
module tune_conversion
  import tune_pkg::*;
#(
  parameter int unsigned VREF_SHIFT = 15
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [N_DI-1:0][ADC_BITS-1:0] di_all,
  input  logic in_valid,
  output logic [$clog2(N_DI)-1:0] coef_addr,
  input  logic signed [ALPHA_W-1:0] coef_data,
  input  logic corr_enable,
  output logic signed [31:0] dnu,
  output logic signed [15:0] vref,
  output logic out_valid
);
  localparam int unsigned ACC_W = ADC_BITS + ALPHA_W + $clog2(N_DI);

  logic [N_DI-1:0][ADC_BITS-1:0] lat;
  logic [$clog2(N_DI+1)-1:0] cnt;
  logic busy, done;
  logic signed [ACC_W-1:0] acc, acc_sh;
  logic signed [ADC_BITS+ALPHA_W-1:0] prod;
  logic [$clog2(N_DI)-1:0] prev;

  assign coef_addr = cnt[$clog2(N_DI)-1:0];
  assign prev      = coef_addr - 1'b1;
  assign prod      = $signed(lat[prev]) * coef_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      lat <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0; acc <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (in_valid) begin lat <= di_all; cnt <= '0; acc <= '0; busy <= 1'b1; end
      end else begin
        cnt <= cnt + 1'b1;
        if (cnt != 0) acc <= acc + ACC_W'(prod);
        if (cnt == N_DI) begin busy <= 1'b0; done <= 1'b1; cnt <= '0; end
      end
    end

  // saturate: the value fits when all bits above the target sign bit equal it
  function automatic logic signed [31:0] sat32(input logic signed [ACC_W-1:0] v);
    if (&v[ACC_W-1:31] || ~|v[ACC_W-1:31]) return v[31:0];
    else return v[ACC_W-1] ? 32'sh8000_0000 : 32'sh7fff_ffff;
  endfunction

  function automatic logic signed [15:0] sat16(input logic signed [ACC_W-1:0] v);
    if (&v[ACC_W-1:15] || ~|v[ACC_W-1:15]) return v[15:0];
    else return v[ACC_W-1] ? 16'sh8000 : 16'sh7fff;
  endfunction

  assign acc_sh = acc >>> VREF_SHIFT;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      dnu <= '0; vref <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= done;
      if (done) begin
        dnu  <= sat32(acc);
        vref <= corr_enable ? sat16(acc_sh) : '0;
      end
    end

  initial assert (ACC_W > 32) else $error("accumulator narrower than dnu");
endmodule
