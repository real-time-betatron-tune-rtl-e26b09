// data_selector_ddr3: drains the seven monitor FIFOs and offers four selected
// streams to the DDR3 writer (50 MHz domain).
//
// Inputs, by 3-bit code: 0..3 {Iout_i, dI_i} of the four local boards,
// 4 {dI5, dI6}, 5 {dI7, dI8}, 6 dnu; code 7 gives 0. Each input is the read
// side of a first-word-fall-through dual-clock FIFO; any word present is
// popped at once and kept as that input's latest value, so no FIFO fills up.
// sel_data[k] is the latest value of input sel[k], registered. The selector
// and its four outputs follow the original block diagram; what it selects
// and how it holds values are this design's choices.
module data_selector_ddr3
  import tune_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic [N_MON-1:0] fifo_empty,
  input  logic [N_MON-1:0][31:0] fifo_data,
  output logic [N_MON-1:0] fifo_pop,
  input  logic [3:0][2:0] sel,
  output logic [3:0][31:0] sel_data,
  output logic [N_MON-1:0] updated
);
  logic [N_MON-1:0][31:0] latest;

  assign fifo_pop = ~fifo_empty;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      latest <= '0; sel_data <= '0; updated <= '0;
    end else begin
      updated <= fifo_pop;
      for (int i = 0; i < N_MON; i++)
        if (fifo_pop[i]) latest[i] <= fifo_data[i];
      for (int k = 0; k < 4; k++)
        sel_data[k] <= (sel[k] < 3'(N_MON)) ? latest[sel[k]] : '0;
    end
endmodule
