// tb_dma_controller: copies blocks between two memory models with random
// waitrequest and read latency, checks every destination word and the word
// count reported with done, that a start during a transfer is refused with
// overrun, and that a zero-length start finishes at once.
module tb_dma_controller;
  import tune_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done, overrun;
  logic [31:0] src_base, dst_base, words, done_words;
  avm_req_t rd_req, wr_req;
  avm_rsp_t rd_rsp, wr_rsp;
  int snw, snr, dnw, dnr, checks = 0, failures = 0, ndone = 0, nover = 0;
  logic [31:0] last_done_words;

  always #10ns clk = ~clk;

  dma_controller dut (.*);
  avalon_mem_model #(.WAIT_PCT(40), .READ_LAT(4)) u_src (.clk, .rst_n, .req(rd_req), .rsp(rd_rsp), .n_writes(snw), .n_reads(snr));
  avalon_mem_model #(.WAIT_PCT(40), .READ_LAT(2)) u_dst (.clk, .rst_n, .req(wr_req), .rsp(wr_rsp), .n_writes(dnw), .n_reads(dnr));

  always @(posedge clk) if (rst_n) begin
    if (done) begin ndone++; last_done_words = done_words; end
    if (overrun) nover++;
  end

  task automatic go(input logic [31:0] s, input logic [31:0] d, input int n);
    @(negedge clk); src_base = s; dst_base = d; words = n; start = 1;
    @(negedge clk); start = 0;
  endtask

  task automatic copy_check(input logic [31:0] s, input logic [31:0] d, input int n);
    int nd0;
    for (int i = 0; i < n; i++) u_src.mem[s + 4*i] = $urandom;
    nd0 = ndone;
    go(s, d, n);
    wait (ndone == nd0 + 1);
    checks++;
    if (last_done_words != n) begin failures++; $display("done_words %0d exp %0d", last_done_words, n); end
    for (int i = 0; i < n; i++) begin
      checks++;
      if (u_dst.peek(d + 4*i) !== u_src.peek(s + 4*i)) begin
        failures++; $display("word %0d: %h exp %h", i, u_dst.peek(d + 4*i), u_src.peek(s + 4*i));
      end
    end
  endtask

  initial begin
    src_base = 0; dst_base = 0; words = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    copy_check(32'h0000_0100, 32'h2000_0000, 37);
    copy_check(32'h0100_0000, 32'h2000_1000, 250);
    // a second start while busy is refused
    for (int i = 0; i < 20; i++) u_src.mem[32'h400 + 4*i] = $urandom;
    go(32'h400, 32'h2000_4000, 20);
    repeat (5) @(posedge clk);
    go(32'h800, 32'h2000_8000, 20);
    wait (!busy); repeat (2) @(posedge clk);
    checks += 2;
    if (nover != 1) begin failures++; $display("overruns %0d", nover); end
    if (u_dst.peek(32'h2000_8000) !== 32'hdead_beef) begin failures++; $display("refused start copied"); end
    // zero length
    begin
      int nd0;
      nd0 = ndone;
      go(32'h0, 32'h2000_c000, 0);
      repeat (3) @(posedge clk);
      checks += 2;
      if (ndone != nd0 + 1 || last_done_words != 0) begin failures++; $display("zero length"); end
      if (busy) begin failures++; $display("busy after zero length"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500us; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
