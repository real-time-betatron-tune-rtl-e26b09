// dma_controller: moves one recorded accelerator cycle from the FPGA-side
// DDR3 into the DDR3 of the processor, where the network program reads it
// (50 MHz domain).
//
// A start pulse with src_base, dst_base and words begins a transfer; it
// copies the words one at a time: an Avalon-MM read on the rd port (held
// until waitrequest is low, data taken at readdatavalid), then an Avalon-MM
// write of that word on the wr port (held until waitrequest is low), the
// addresses stepping by 4 bytes. done pulses with the word count when the
// last write is accepted. A start while a transfer runs is refused and
// pulses overrun. The original moves each stored cycle with DMA; this simple
// one-word-at-a-time engine and its automatic start are this design's
// choices.
// rst_n also appears in the assertions' disable iff clause, which is why a
// linter may report it as used both synchronously and asynchronously; the
// flops themselves are reset only asynchronously. Of the write port's
// response only waitrequest is used.
module dma_controller
  import tune_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic [31:0] src_base,
  input  logic [31:0] dst_base,
  input  logic [31:0] words,
  output avm_req_t rd_req,
  input  avm_rsp_t rd_rsp,
  output avm_req_t wr_req,
  input  avm_rsp_t wr_rsp,
  output logic busy,
  output logic done,
  output logic [31:0] done_words,
  output logic overrun
);
  typedef enum logic [1:0] {D_IDLE, D_READ, D_RWAIT, D_WRITE} state_e;
  state_e state;
  logic [31:0] src, dst, left, total;

  assign busy = (state != D_IDLE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= D_IDLE; src <= '0; dst <= '0; left <= '0; total <= '0;
      rd_req <= '0; wr_req <= '0; done <= 1'b0; done_words <= '0; overrun <= 1'b0;
    end else begin
      done <= 1'b0; overrun <= 1'b0;
      if (start && busy) overrun <= 1'b1;
      unique case (state)
        D_IDLE: if (start) begin
          src <= src_base; dst <= dst_base; left <= words; total <= words;
          if (words == 0) begin done <= 1'b1; done_words <= '0; end
          else begin
            state <= D_READ; rd_req.read <= 1'b1; rd_req.address <= src_base;
          end
        end
        D_READ: if (!rd_rsp.waitrequest) begin
          rd_req.read <= 1'b0; state <= D_RWAIT;
        end
        D_RWAIT: if (rd_rsp.readdatavalid) begin
          wr_req.write <= 1'b1; wr_req.address <= dst; wr_req.writedata <= rd_rsp.readdata;
          state <= D_WRITE;
        end
        D_WRITE: if (!wr_rsp.waitrequest) begin
          wr_req.write <= 1'b0;
          src <= src + 32'd4; dst <= dst + 32'd4; left <= left - 1'b1;
          if (left == 32'd1) begin
            state <= D_IDLE; done <= 1'b1; done_words <= total;
          end else begin
            state <= D_READ; rd_req.read <= 1'b1; rd_req.address <= src + 32'd4;
          end
        end
        default: state <= D_IDLE;
      endcase
    end

  a_rd_held: assert property (@(posedge clk) disable iff (!rst_n)
    rd_req.read && rd_rsp.waitrequest |=> rd_req.read && $stable(rd_req.address));
  a_wr_held: assert property (@(posedge clk) disable iff (!rst_n)
    wr_req.write && wr_rsp.waitrequest |=> wr_req.write && $stable(wr_req.address) && $stable(wr_req.writedata));
endmodule
