// avalon_arbiter: lets two Avalon-MM masters share one slave, here the
// FPGA-side DDR3 controller shared by the real-time writer (master 0) and the
// read side of the DMA (master 1).
//
// Master 0 has fixed priority. The chosen master's request passes straight
// to the slave in the same cycle; the other master sees waitrequest high.
// Once a read is accepted the grant stays with its master until the slave
// returns readdatavalid, which is routed only to that master; so one read is
// outstanding at a time. Sharing the memory over the Avalon bus is the
// original's arrangement; the priority scheme is this design's choice.
// rst_n also appears in the assertions' disable iff clause, which is why a
// linter may report it as used both synchronously and asynchronously; the
// flops themselves are reset only asynchronously.
module avalon_arbiter
  import tune_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  avm_req_t m0_req,
  output avm_rsp_t m0_rsp,
  input  avm_req_t m1_req,
  output avm_rsp_t m1_rsp,
  output avm_req_t s_req,
  input  avm_rsp_t s_rsp
);
  logic locked, owner, gnt;
  logic m0_want;

  assign m0_want = m0_req.read || m0_req.write;
  assign gnt = locked ? owner : (m0_want ? 1'b0 : 1'b1);

  always_comb begin
    s_req = locked ? '0 : (gnt ? m1_req : m0_req);

    m0_rsp.readdata = s_rsp.readdata;
    m1_rsp.readdata = s_rsp.readdata;
    m0_rsp.readdatavalid = s_rsp.readdatavalid && locked && !owner;
    m1_rsp.readdatavalid = s_rsp.readdatavalid && locked && owner;
    m0_rsp.waitrequest = locked || gnt != 1'b0 || s_rsp.waitrequest;
    m1_rsp.waitrequest = locked || gnt != 1'b1 || s_rsp.waitrequest;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      locked <= 1'b0; owner <= 1'b0;
    end else if (!locked) begin
      if (s_req.read && !s_rsp.waitrequest) begin locked <= 1'b1; owner <= gnt; end
    end else if (s_rsp.readdatavalid) begin
      locked <= 1'b0;
    end

  a_one_read: assert property (@(posedge clk) disable iff (!rst_n)
    s_rsp.readdatavalid |-> locked);
endmodule
