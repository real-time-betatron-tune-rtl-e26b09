// tb_tune_conversion: loads random coefficients alpha_1..8 into a one-cycle
// latency table, feeds random sets of dI_1..8 and checks dnu against the sum
// computed here, Vref against the shifted and saturated sum, the latency of
// N_DI+2 = 10 cycles, Vref = 0 with the correction disabled, and saturation
// of Vref with large coefficients.
module tb_tune_conversion;
  import tune_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, corr_enable = 1, out_valid;
  logic [N_DI-1:0][ADC_BITS-1:0] di_all;
  logic [$clog2(N_DI)-1:0] coef_addr;
  logic signed [ALPHA_W-1:0] coef_data;
  logic signed [31:0] dnu;
  logic signed [15:0] vref;
  logic signed [ALPHA_W-1:0] alpha [N_DI];
  int checks = 0, failures = 0, nsat = 0;

  always #6.25ns clk = ~clk;
  always_ff @(posedge clk) coef_data <= alpha[coef_addr];

  tune_conversion dut (.*);

  task automatic one(input bit big);
    longint s, sh, v_exp, d_exp;
    longint MAX32 = 2147483647, MIN32 = -2147483647 - 1;
    int lat;
    for (int i = 0; i < N_DI; i++) di_all[i] = 16'($urandom);
    s = 0;
    for (int i = 0; i < N_DI; i++) s += longint'($signed(di_all[i])) * longint'(alpha[i]);
    sh = s >>> 15;
    v_exp = !corr_enable ? 0 : (sh > 32767 ? 32767 : (sh < -32768 ? -32768 : sh));
    d_exp = s > MAX32 ? MAX32 : (s < MIN32 ? MIN32 : s);
    if (sh > 32767 || sh < -32768) nsat++;
    @(posedge clk); in_valid <= 1;
    @(posedge clk); in_valid <= 0;            // this edge takes in_valid
    lat = 0;
    do begin @(posedge clk); lat++; end while (!out_valid);
    // out_valid is sampled high here, set N_DI+2 edges after the taking edge
    checks += 3;
    if (lat != N_DI + 3) begin failures++; $display("latency %0d", lat); end
    if (longint'(dnu) != d_exp) begin failures++; $display("dnu %0d exp %0d", dnu, d_exp); end
    if (longint'(vref) != v_exp) begin failures++; $display("vref %0d exp %0d (en %b)", vref, v_exp, corr_enable); end
  endtask

  initial begin
    di_all = '0;
    for (int i = 0; i < N_DI; i++) alpha[i] = ALPHA_W'($urandom);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      corr_enable = (n % 7 != 3);
      if (n % 10 == 0) for (int i = 0; i < N_DI; i++) alpha[i] = ALPHA_W'($urandom_range(0, 3000)) - 18'sd1500;
      one(0);
    end
    // large coefficients drive Vref into saturation
    corr_enable = 1;
    for (int i = 0; i < N_DI; i++) alpha[i] = 18'sd131071;
    for (int n = 0; n < 10; n++) one(1);
    checks++; if (nsat == 0) begin failures++; $display("saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
