// tb_write_ddr3: records three accelerator cycles into a memory model with
// random waitrequest and checks the ping-pong buffer bases, the word counts
// reported with done, the memory contents record by record ({sel_data[0..3],
// dnu}), the close on max_samples (extra samples dropped), the close on run
// going low, and the close on a new cycle_start.
module tb_write_ddr3;
  import tune_pkg::*;
  logic clk = 0, rst_n = 0, run = 0, cycle_start = 0;
  logic [31:0] buf_base0 = 32'h0000_1000, buf_base1 = 32'h0000_8000, max_samples = 20;
  logic [3:0][31:0] sel_data;
  logic dnu_empty, dnu_pop, done, recording;
  logic [31:0] dnu_data, done_base, done_words;
  avm_req_t avm_req;
  avm_rsp_t avm_rsp;
  int nw, nr, checks = 0, failures = 0, ndone = 0, stalls = 0;
  // dnu FIFO model: words in qa[], read pointer moved with a nonblocking
  // assignment so the block sees the pre-edge head like a real FIFO
  logic [31:0] qa [0:1023];
  int qw = 0, qr = 0;
  logic [31:0] exp_words [$];
  logic [31:0] got_base [$];
  logic [31:0] got_words [$];

  always #10ns clk = ~clk;

  assign dnu_empty = (qr == qw);
  assign dnu_data  = qa[qr];

  write_ddr3 dut (.*);
  avalon_mem_model #(.WAIT_PCT(30)) u_mem (.clk, .rst_n, .req(avm_req), .rsp(avm_rsp), .n_writes(nw), .n_reads(nr));

  always @(posedge clk) if (rst_n) begin
    if (dnu_pop && !dnu_empty) begin
      if (dut.state == 1) begin   // a record is taken (not dropped)
        for (int k = 0; k < 4; k++) exp_words.push_back(sel_data[k]);
        exp_words.push_back(qa[qr]);
      end
      qr <= qr + 1;
    end
    if (done) begin ndone++; got_base.push_back(done_base); got_words.push_back(done_words); end
    if (avm_req.write && avm_rsp.waitrequest) stalls++;
    sel_data <= {$urandom, $urandom, $urandom, $urandom};
  end

  task automatic samples(input int n);
    repeat (n) begin
      @(negedge clk); qa[qw] = $urandom; qw++;
      repeat ($urandom_range(6, 20)) @(posedge clk);
    end
  endtask
  task automatic trig;
    @(posedge clk); cycle_start <= 1; @(posedge clk); cycle_start <= 0;
  endtask
  task automatic check_buf(input int idx, input logic [31:0] base, input int words);
    checks += 2;
    if (got_base[idx] !== base) begin failures++; $display("buffer %0d base %h exp %h", idx, got_base[idx], base); end
    if (got_words[idx] != words) begin failures++; $display("buffer %0d words %0d exp %0d", idx, got_words[idx], words); end
    for (int i = 0; i < words; i++) begin
      logic [31:0] e;
      e = exp_words.pop_front();
      checks++;
      if (u_mem.peek(base + 4*i) !== e) begin failures++; $display("buffer %0d word %0d: %h exp %h", idx, i, u_mem.peek(base + 4*i), e); end
    end
  endtask

  initial begin
    sel_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run = 1;
    samples(3);                  // before the first cycle: dropped
    repeat (30) @(posedge clk);
    exp_words.delete();
    trig();
    samples(10);
    repeat (30) @(posedge clk);
    trig();                      // closes buffer 0, opens buffer 1
    samples(25);                 // closes at 20, the rest dropped
    repeat (30) @(posedge clk);
    checks++;
    if (ndone != 2) begin failures++; $display("done pulses %0d", ndone); end
    else begin
      check_buf(0, 32'h1000, 50);  // checked now: the third cycle reuses this buffer
      check_buf(1, 32'h8000, 100);
    end
    trig();                      // opens buffer 0 again
    samples(3);
    repeat (30) @(posedge clk);
    run = 0;                     // closes it
    repeat (10) @(posedge clk);
    checks++;
    if (ndone != 3) begin failures++; $display("done pulses %0d", ndone); end
    else begin
      check_buf(2, 32'h1000, 15);
    end
    checks++; if (stalls == 0) begin failures++; $display("no waitrequest stall seen"); end
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
