// tb_internal_memory: writes random words through the 50 MHz Avalon port,
// reads them back there (one-cycle latency, readdatavalid) and through the
// 80 MHz read port.
module tb_internal_memory;
  logic clk_a = 0, clk_b = 0, rst_a_n = 0;
  logic [7:0] avs_address = 0, addr_b = 0;
  logic avs_read = 0, avs_write = 0, avs_readdatavalid;
  logic [31:0] avs_writedata = 0, avs_readdata, q_b;
  logic [31:0] model [256];
  int checks = 0, failures = 0;

  always #10ns   clk_a = ~clk_a;
  always #6.25ns clk_b = ~clk_b;

  internal_memory dut (.*);

  initial begin
    repeat (2) @(posedge clk_a); rst_a_n = 1;
    for (int i = 0; i < 256; i++) begin
      @(posedge clk_a);
      avs_write <= 1; avs_address <= 8'(i); avs_writedata <= $urandom; 
      @(posedge clk_a); model[i] = avs_writedata;
      avs_write <= 0;
    end
    for (int i = 0; i < 64; i++) begin
      int a;
      a = $urandom_range(255);
      @(posedge clk_a); avs_read <= 1; avs_address <= 8'(a);
      @(posedge clk_a); avs_read <= 0;
      @(negedge clk_a);
      checks += 2;
      if (!avs_readdatavalid) begin failures++; $display("no readdatavalid"); end
      if (avs_readdata !== model[a]) begin failures++; $display("A[%0d] %h exp %h", a, avs_readdata, model[a]); end
    end
    for (int i = 0; i < 64; i++) begin
      int a;
      a = $urandom_range(255);
      @(posedge clk_b); addr_b <= 8'(a);
      @(posedge clk_b); @(negedge clk_b);
      checks++;
      if (q_b !== model[a]) begin failures++; $display("B[%0d] %h exp %h", a, q_b, model[a]); end
    end
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
