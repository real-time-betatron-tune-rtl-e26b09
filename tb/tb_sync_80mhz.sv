// tb_sync_80mhz: presents local sets dI1..dI4 in the 160 MHz domain and
// remote pairs in the 80 MHz domain at unrelated times, and checks that
// every local sample gives exactly one aligned set of eight in the 80 MHz
// domain, made of that local sample and the latest remote pairs, within
// eight 80 MHz cycles.
module tb_sync_80mhz;
  import tune_pkg::*;
  logic clk160 = 0, clk80 = 0, rst160_n = 0, rst80_n = 0;
  logic [N_LOCAL-1:0][ADC_BITS-1:0] di_local;
  logic local_valid = 0, remote_valid = 0, valid;
  logic [31:0] di56 = 0, di78 = 0;
  logic [N_DI-1:0][ADC_BITS-1:0] di_all;
  int checks = 0, failures = 0, nout = 0;
  logic [N_LOCAL-1:0][ADC_BITS-1:0] exp_loc;
  logic [31:0] exp56 = 0, exp78 = 0;
  longint t_in;

  always #3.125ns clk160 = ~clk160;
  always #6.25ns  clk80  = ~clk80;

  sync_80mhz dut (.*);

  always @(posedge clk80) if (valid && rst80_n) begin
    nout++;
    checks += 2;
    if (di_all[3:0] !== exp_loc) begin failures++; $display("local %h exp %h", di_all[3:0], exp_loc); end
    if (di_all[7:4] !== {exp78[15:0], exp78[31:16], exp56[15:0], exp56[31:16]}) begin
      failures++; $display("remote %h", di_all[7:4]);
    end
    checks++;
    if ($time - t_in > 8 * 12.5) begin failures++; $display("latency %0t", $time - t_in); end
  end

  initial begin
    di_local = '0;
    #50ns rst160_n = 1; rst80_n = 1;
    for (int s = 0; s < 30; s++) begin
      // remote pair update at a random point
      repeat ($urandom_range(3, 40)) @(posedge clk80);
      if (s % 3 != 2) begin
        @(posedge clk80);
        di56 <= $urandom; di78 <= $urandom; remote_valid <= 1;
        @(posedge clk80);
        remote_valid <= 0; exp56 = di56; exp78 = di78;
      end
      repeat ($urandom_range(3, 40)) @(posedge clk160);
      @(posedge clk160);
      for (int k = 0; k < N_LOCAL; k++) di_local[k] <= 16'($urandom);
      local_valid <= 1;
      @(posedge clk160);
      local_valid <= 0; exp_loc = di_local; t_in = $time;
      repeat (30) @(posedge clk80);
    end
    checks++; if (nout != 30) begin failures++; $display("outputs %0d", nout); end
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
