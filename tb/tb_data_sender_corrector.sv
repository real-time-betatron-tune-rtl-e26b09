// tb_data_sender_corrector: feeds Vref words through a queue that behaves
// like a first-word-fall-through FIFO, decodes the serial line (one bit per
// 20 MHz cycle) and checks each word, its parity and stop bit, that frames
// are 19 cycles long and that every word is sent once, in order.
module tb_data_sender_corrector;
  logic clk = 0, rst_n = 0, in_pop, txd, busy, in_empty;
  logic [15:0] in_data;
  logic [15:0] q [$];
  logic [15:0] sent [$];
  int checks = 0, failures = 0, nrx = 0;
  longint cyc = 0;

  always #25ns clk = ~clk;
  always @(posedge clk) cyc++;

  assign in_empty = (q.size() == 0);
  assign in_data  = in_empty ? 16'h0 : q[0];
  // The pop is seen at the rising edge and carried out at the falling edge,
  // so the design never samples a queue the testbench is changing.
  logic pop_pend = 0;
  always @(posedge clk) pop_pend <= rst_n && in_pop && !in_empty;
  always @(negedge clk) if (pop_pend) sent.push_back(q.pop_front());

  data_sender_corrector dut (.*);

  // line decoder
  initial begin
    logic [17:0] f;
    longint t0;
    wait (rst_n);
    forever begin
      @(posedge clk);
      if (txd === 1'b0) begin
        t0 = cyc;
        for (int i = 17; i >= 0; i--) begin @(posedge clk); f[i] = txd; end
        checks += 3;
        if (sent.size() == 0 || f[17:2] !== sent[0]) begin failures++; $display("word %h", f[17:2]); end
        if (f[1] !== ^f[17:2]) begin failures++; $display("parity"); end
        if (f[0] !== 1'b1) begin failures++; $display("stop bit"); end
        if (sent.size() != 0) void'(sent.pop_front());
        nrx++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      q.push_back(16'($urandom));
      if (n % 4 == 0) q.push_back(16'($urandom));   // back-to-back words
      repeat ($urandom_range(0, 60)) @(posedge clk);
    end
    wait (q.size() == 0);
    repeat (40) @(posedge clk);
    checks++; if (nrx != 75) begin failures++; $display("frames %0d", nrx); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
