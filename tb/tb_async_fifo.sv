// tb_async_fifo: pushes 300 random words from a 160 MHz side and pops them
// at random on a 50 MHz side, checking order, data, that nothing is lost
// and that full and empty are raised when they must be.
module tb_async_fifo;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_en = 0, rd_en, full, empty;
  logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;
  int nw = 0, nr = 0, saw_full = 0;
  logic [31:0] ref_q [$];

  always #3.125ns wclk = ~wclk;
  always #10ns    rclk = ~rclk;

  async_fifo #(.WIDTH(32), .DEPTH(16)) dut (.*);

  initial begin
    #100ns wrst_n = 1; rrst_n = 1;
  end

  // writer: bursts that overrun the reader
  always @(posedge wclk) if (wrst_n) begin
    if (full) saw_full++;
    if (wr_en && !full) begin ref_q.push_back(wdata); nw++; end
    wr_en <= (nw < 300) && ($urandom_range(3) != 0);
    wdata <= $urandom;
  end

  // reader: pops at random
  always @(posedge rclk) if (rrst_n) begin
    if (rd_en && !empty) begin
      checks++;
      if (ref_q.size() == 0 || rdata !== ref_q[0]) begin
        failures++; $display("mismatch at word %0d: got %h", nr, rdata);
      end
      if (ref_q.size() != 0) void'(ref_q.pop_front());
      nr++;
    end
    rd_en <= ($urandom_range(2) != 0);
  end

  initial begin
    wait (nr == 300);
    repeat (20) @(posedge rclk);
    checks++; if (!empty) begin failures++; $display("not empty at end"); end
    checks++; if (saw_full == 0) begin failures++; $display("full never raised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us; failures++;
    $display("watchdog: nr=%0d", nr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
