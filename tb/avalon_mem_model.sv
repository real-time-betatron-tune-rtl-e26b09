// avalon_mem_model: behavioural model (not synthesizable) of a memory behind
// an Avalon-MM slave, standing in for a DDR3 controller and its memory.
//
// 32-bit words at byte addresses (sparse storage). waitrequest is random,
// high with probability WAIT_PCT percent, and a command is accepted in a
// cycle where it is low. Read data returns READ_LAT cycles after acceptance
// with readdatavalid. Counts accepted writes and reads.
module avalon_mem_model
  import tune_pkg::*;
#(
  parameter int unsigned WAIT_PCT = 30,
  parameter int unsigned READ_LAT = 3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  avm_req_t req,
  output avm_rsp_t rsp,
  output int       n_writes,
  output int       n_reads
);
  logic [31:0] mem [logic [31:0]];
  logic [31:0] pipe_d [READ_LAT];
  logic        pipe_v [READ_LAT];
  logic        wr;

  initial begin n_writes = 0; n_reads = 0; wr = 1'b0; end

  function automatic logic [31:0] peek(input logic [31:0] a);
    return mem.exists(a) ? mem[a] : 32'hdead_beef;
  endfunction

  always_ff @(posedge clk) begin
    wr <= ($urandom_range(99) < WAIT_PCT);
  end
  assign rsp.waitrequest = wr;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < READ_LAT; i++) begin pipe_v[i] <= 1'b0; pipe_d[i] <= '0; end
    end else begin
      for (int i = 1; i < READ_LAT; i++) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
      pipe_v[0] <= req.read && !wr;
      pipe_d[0] <= peek(req.address);
      if (req.read && !wr) n_reads <= n_reads + 1;
      if (req.write && !wr) n_writes <= n_writes + 1;
    end
  always @(posedge clk) if (rst_n && req.write && !wr) mem[req.address] = req.writedata;

  assign rsp.readdatavalid = pipe_v[READ_LAT-1];
  assign rsp.readdata      = pipe_d[READ_LAT-1];
endmodule
