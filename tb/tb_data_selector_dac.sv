// tb_data_selector_dac: updates the 160 MHz local words, the 80 MHz remote
// pairs and Vref, then checks in the 20 MHz domain that each DAC channel
// shows the source its 4-bit code selects, for every code 0..15.
module tb_data_selector_dac;
  import tune_pkg::*;
  logic clk160 = 0, clk80 = 0, clk = 0, rst160_n = 0, rst80_n = 0, rst_n = 0;
  logic [N_LOCAL-1:0][ADC_BITS-1:0] iout, di_local;
  logic local_valid = 0, remote_valid = 0, vref_valid = 0;
  logic [31:0] di56, di78;
  logic [15:0] vref;
  logic [N_DAC-1:0][3:0] sel;
  logic [N_DAC-1:0][15:0] dac_data;
  int checks = 0, failures = 0;

  always #3.125ns clk160 = ~clk160;
  always #6.25ns  clk80  = ~clk80;
  always #25ns    clk    = ~clk;

  data_selector_dac dut (.*);

  function automatic logic [15:0] expect_src(input logic [3:0] code);
    case (code)
      0, 1, 2, 3:        return iout[code];
      4, 5, 6, 7:        return di_local[code - 4];
      8:  return di56[31:16];
      9:  return di56[15:0];
      10: return di78[31:16];
      11: return di78[15:0];
      12: return vref;
      default: return 16'h0;
    endcase
  endfunction

  initial begin
    iout = '0; di_local = '0; di56 = 0; di78 = 0; vref = 0; sel = '0;
    #100ns rst160_n = 1; rst80_n = 1; rst_n = 1;
    for (int r = 0; r < 12; r++) begin
      @(posedge clk160);
      for (int k = 0; k < 4; k++) begin iout[k] <= 16'($urandom); di_local[k] <= 16'($urandom); end
      local_valid <= 1;
      @(posedge clk160); local_valid <= 0;
      @(posedge clk80);
      di56 <= $urandom; di78 <= $urandom; vref <= 16'($urandom);
      remote_valid <= 1; vref_valid <= 1;
      @(posedge clk80); remote_valid <= 0; vref_valid <= 0;
      for (int base = 0; base < 16; base += 4) begin
        for (int c = 0; c < 4; c++) sel[c] = 4'(base + c + r);   // rotate codes over channels
        repeat (8) @(posedge clk);
        for (int c = 0; c < 4; c++) begin
          checks++;
          if (dac_data[c] !== expect_src(sel[c])) begin
            failures++; $display("r%0d ch%0d code %0d: %h exp %h", r, c, sel[c], dac_data[c], expect_src(sel[c]));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
