// tb_data_selector_ddr3: fills seven queues that behave like the monitor
// FIFOs at random times and checks that every word is drained at once and
// that the four outputs show the latest word of the selected inputs (code 7
// gives zero).
module tb_data_selector_ddr3;
  import tune_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [N_MON-1:0] fifo_empty, fifo_pop, updated;
  logic [N_MON-1:0][31:0] fifo_data;
  logic [3:0][2:0] sel;
  logic [3:0][31:0] sel_data;
  logic [31:0] q [N_MON][$];
  logic [31:0] last [N_MON];
  int checks = 0, failures = 0, npop = 0, npush = 0;

  always #10ns clk = ~clk;

  always_comb for (int i = 0; i < N_MON; i++) begin
    fifo_empty[i] = (q[i].size() == 0);
    fifo_data[i]  = fifo_empty[i] ? 32'h0 : q[i][0];
  end
  // Pops are seen at the rising edge and carried out at the falling edge,
  // so the design never samples a queue the testbench is changing.
  logic [N_MON-1:0] pop_pend = '0;
  always @(posedge clk) pop_pend <= rst_n ? (fifo_pop & ~fifo_empty) : '0;
  always @(negedge clk)
    for (int i = 0; i < N_MON; i++) if (pop_pend[i]) begin
      last[i] = q[i].pop_front(); npop++;
    end

  data_selector_ddr3 dut (.*);

  initial begin
    sel = '0;
    for (int i = 0; i < N_MON; i++) last[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      @(negedge clk);
      for (int i = 0; i < N_MON; i++) if ($urandom_range(2) == 0) begin q[i].push_back($urandom); npush++; end
      for (int k = 0; k < 4; k++) sel[k] = 3'($urandom);
      repeat (3) @(posedge clk);
      @(negedge clk);
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (sel_data[k] !== (sel[k] == 7 ? 32'h0 : last[sel[k]])) begin
          failures++; $display("r%0d out%0d sel %0d: %h exp %h", r, k, sel[k], sel_data[k], last[sel[k]]);
        end
      end
      checks++;
      if (npop != npush) begin failures++; $display("not drained"); end
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
