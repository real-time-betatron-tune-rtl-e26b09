// write_ddr3: records the monitor data of one accelerator cycle into the
// FPGA-side DDR3 (50 MHz domain, Avalon-MM master).
//
// Recording is opened by a cycle_start pulse (the accelerator's cycle
// trigger) and runs while run is high. Each dnu word arriving from its FIFO
// marks one sample: it is popped (outside a cycle dnu words are dropped) and a record of REC_WORDS = 5 32-bit words,
// {sel_data[0..3], dnu}, is written to consecutive addresses, one write
// command at a time, each held until waitrequest is low. Two buffers at
// buf_base0 and buf_base1 are used in turn. A buffer is closed by the next
// cycle_start or when it holds max_samples records; then done pulses with
// done_base and done_words (words written), and the next cycle_start opens
// the other buffer. The original stores the data of one cycle (2.48 to
// 5.2 s) in this DDR3 before moving it on; the double buffering, the record
// layout and the cycle trigger are this design's choices.
// rst_n also appears in the assertions' disable iff clause, which is why a
// linter may report it as used both synchronously and asynchronously; the
// flops themselves are reset only asynchronously. Of the bus response only
// waitrequest is used, since this master only writes.
module write_ddr3
  import tune_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic run,
  input  logic cycle_start,
  input  logic [31:0] buf_base0,
  input  logic [31:0] buf_base1,
  input  logic [31:0] max_samples,
  input  logic [3:0][31:0] sel_data,
  input  logic dnu_empty,
  input  logic [31:0] dnu_data,
  output logic dnu_pop,
  output avm_req_t avm_req,
  input  avm_rsp_t avm_rsp,
  output logic done,
  output logic [31:0] done_base,
  output logic [31:0] done_words,
  output logic recording
);
  typedef enum logic [1:0] {W_IDLE, W_WAIT, W_WRITE} state_e;
  state_e state;

  logic        bsel;            // buffer being filled
  logic [31:0] base, nsamp, nwords;
  logic [REC_WORDS-1:0][31:0] rec;
  logic [2:0]  widx;
  logic        start_pend, cs_evt;   // cycle_start seen while busy writing

  assign cs_evt = cycle_start || start_pend;

  logic close;
  assign close = cs_evt || !run || nsamp == max_samples;
  // outside a cycle dnu words are drained and dropped
  assign dnu_pop = !dnu_empty && (state == W_IDLE || (state == W_WAIT && !close));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= W_IDLE; bsel <= 1'b0; base <= '0; nsamp <= '0; nwords <= '0;
      rec <= '0; widx <= '0; recording <= 1'b0; start_pend <= 1'b0;
      avm_req <= '0; done <= 1'b0; done_base <= '0; done_words <= '0;
    end else begin
      done <= 1'b0;
      if (cycle_start && state == W_WRITE) start_pend <= 1'b1;
      unique case (state)
        W_IDLE: begin
          start_pend <= 1'b0;
          if (run && cs_evt) begin
            base <= bsel ? buf_base1 : buf_base0;
            nsamp <= '0; nwords <= '0; recording <= 1'b1; state <= W_WAIT;
          end
        end
        W_WAIT: begin
          if (close) begin
            start_pend <= 1'b0;
            // close the buffer, hand it over, open the other one if triggered
            done <= 1'b1; done_base <= base; done_words <= nwords;
            bsel <= ~bsel;
            nsamp <= '0; nwords <= '0;
            if (cs_evt && run) begin
              base <= bsel ? buf_base0 : buf_base1;
            end else begin
              recording <= 1'b0; state <= W_IDLE;
            end
          end else if (!dnu_empty) begin
            rec <= {dnu_data, sel_data[3], sel_data[2], sel_data[1], sel_data[0]};
            widx <= '0; state <= W_WRITE;
            avm_req.write <= 1'b1;
            avm_req.address <= base + (nwords << 2);
            avm_req.writedata <= sel_data[0];
          end
        end
        W_WRITE: if (!avm_rsp.waitrequest) begin
          nwords <= nwords + 1'b1;
          if (widx == 3'(REC_WORDS-1)) begin
            avm_req.write <= 1'b0; nsamp <= nsamp + 1'b1; state <= W_WAIT;
          end else begin
            widx <= widx + 1'b1;
            avm_req.address <= avm_req.address + 32'd4;
            avm_req.writedata <= rec[widx + 1'b1];
          end
        end
        default: state <= W_IDLE;
      endcase
    end

  // a write command must stay stable until accepted
  property p_write_held;
    @(posedge clk) disable iff (!rst_n)
      avm_req.write && avm_rsp.waitrequest |=> avm_req.write && $stable(avm_req.address) && $stable(avm_req.writedata);
  endproperty
  a_write_held: assert property (p_write_held);
endmodule
