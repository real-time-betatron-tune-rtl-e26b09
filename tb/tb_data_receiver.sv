// tb_data_receiver: sends frames of four random 16-bit words on the serial
// line at 10 Mb/s (8 cycles of 80 MHz per bit), with random idle gaps, and
// checks the received pairs {dI5,dI6} and {dI7,dI8}. Every fifth frame has
// its parity bit inverted and must give frame_err and leave the outputs
// unchanged.
module tb_data_receiver;
  logic clk = 0, rst_n = 0, rxd = 1;
  logic [31:0] di56, di78;
  logic valid, frame_err;
  int checks = 0, failures = 0, nvalid = 0, nerr = 0;

  always #6.25ns clk = ~clk;

  data_receiver dut (.*);

  task automatic send(input logic [63:0] w, input bit bad);
    logic p;
    p = ^w ^ bad;
    rxd <= 1'b0; repeat (8) @(posedge clk);
    for (int i = 63; i >= 0; i--) begin rxd <= w[i]; repeat (8) @(posedge clk); end
    rxd <= p; repeat (8) @(posedge clk);
    rxd <= 1'b1; repeat (8) @(posedge clk);
  endtask

  always @(posedge clk) begin
    if (valid) nvalid++;
    if (frame_err) nerr++;
  end

  initial begin
    logic [63:0] w, last;
    last = '0;
    repeat (4) @(posedge clk); rst_n = 1;
    repeat (10) @(posedge clk);
    for (int f = 0; f < 40; f++) begin
      bit bad;
      w = {$urandom, $urandom};
      bad = (f % 5 == 4);
      send(w, bad);
      repeat (4 + $urandom_range(20)) @(posedge clk);
      checks += 2;
      if (bad) begin
        if ({di56, di78} !== last) begin failures++; $display("bad frame changed output"); end
        if (nerr != f/5 + 1) begin failures++; $display("frame_err count %0d", nerr); end
      end else begin
        if ({di56, di78} !== w) begin failures++; $display("frame %0d: %h exp %h", f, {di56, di78}, w); end
        if (nvalid != f - f/5 + 1) begin failures++; $display("valid count %0d", nvalid); end
        last = w;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
