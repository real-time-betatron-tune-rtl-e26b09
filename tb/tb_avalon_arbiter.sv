// tb_avalon_arbiter: master 0 writes a block while master 1 reads back a
// prefilled block through the arbiter into one memory model with random
// waitrequest; checks every word read and written, that both masters were
// granted while the other was requesting, and that a read's data goes only
// to the master that asked.
module tb_avalon_arbiter;
  import tune_pkg::*;
  logic clk = 0, rst_n = 0;
  avm_req_t m0_req, m1_req, s_req;
  avm_rsp_t m0_rsp, m1_rsp, s_rsp;
  int nw, nr, checks = 0, failures = 0, contention = 0, m0_rdv = 0;
  logic [31:0] pre [64];

  always #10ns clk = ~clk;

  avalon_arbiter dut (.*);
  avalon_mem_model #(.WAIT_PCT(30), .READ_LAT(3)) u_mem (.clk, .rst_n, .req(s_req), .rsp(s_rsp), .n_writes(nw), .n_reads(nr));

  always @(posedge clk) if (rst_n) begin
    if ((m0_req.read || m0_req.write) && (m1_req.read || m1_req.write)) contention++;
    if (m0_rsp.readdatavalid) m0_rdv++;
  end

  initial begin
    m0_req = '0; m1_req = '0;
    for (int i = 0; i < 64; i++) begin pre[i] = $urandom; u_mem.mem[32'h8000 + 4*i] = pre[i]; end
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      // master 0: writes
      for (int i = 0; i < 64; i++) begin
        @(negedge clk);
        m0_req.write = 1; m0_req.address = 32'h100 + 4*i; m0_req.writedata = i * 32'h0101_0101;
        do @(posedge clk); while (m0_rsp.waitrequest);
        @(negedge clk); m0_req.write = 0;
        repeat ($urandom_range(2)) @(negedge clk);
      end
      // master 1: reads
      for (int i = 0; i < 64; i++) begin
        @(negedge clk);
        m1_req.read = 1; m1_req.address = 32'h8000 + 4*i;
        do @(posedge clk); while (m1_rsp.waitrequest);
        @(negedge clk); m1_req.read = 0;
        while (!m1_rsp.readdatavalid) @(negedge clk);
        checks++;
        if (m1_rsp.readdata !== pre[i]) begin failures++; $display("read %0d: %h exp %h", i, m1_rsp.readdata, pre[i]); end
      end
    join
    repeat (5) @(posedge clk);
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (u_mem.peek(32'h100 + 4*i) !== i * 32'h0101_0101) begin failures++; $display("write %0d lost", i); end
    end
    checks += 2;
    if (contention == 0) begin failures++; $display("masters never competed"); end
    if (m0_rdv != 0) begin failures++; $display("read data routed to master 0"); end
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
