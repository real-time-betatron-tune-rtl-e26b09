// async_fifo: dual-clock FIFO carrying sample words between clock domains.
//
// Classic Gray-coded pointer FIFO. Each side keeps a binary pointer and its
// Gray copy; the Gray copy of the other side is brought over with two
// flip-flops and compared to make full (write side) and empty (read side).
// Reads are first-word-fall-through: rdata shows the head word while empty is
// low, rd_en pops it. wr_en when full and rd_en when empty are ignored.
// Depth must be a power of two. The original firmware uses such FIFOs at every
// domain crossing of the monitor and corrector paths; its depth is not known,
// 16 is this design's choice.
module async_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0] wbin_nxt, rbin_nxt;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  assign wbin_nxt = wbin + ((wr_en && !full) ? 1'b1 : 1'b0);
  always_ff @(posedge wclk or negedge wrst_n)
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin <= wbin_nxt;
      wgray <= bin2gray(wbin_nxt);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  always_ff @(posedge wclk)
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;
  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  // read side
  assign rbin_nxt = rbin + ((rd_en && !empty) ? 1'b1 : 1'b0);
  always_ff @(posedge rclk or negedge rrst_n)
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin <= rbin_nxt;
      rgray <= bin2gray(rbin_nxt);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  assign empty = (rgray == wgray_r2);
  assign rdata = mem[rbin[AW-1:0]];

  initial assert (DEPTH >= 4 && (1 << AW) == DEPTH) else $error("DEPTH must be a power of two >= 4");
endmodule
