// internal_memory: on-chip RAM on the Avalon bus that holds the conversion
// coefficients alpha_i.
//
// Port A is an Avalon-MM slave in the bus (50 MHz) domain: word addresses,
// 32-bit data, reads return one cycle later with avs_readdatavalid, writes
// take effect at once, no wait states. Port B is a read-only port in the
// 80 MHz domain for the tune conversion, also with one cycle of latency. The
// CPU writes alpha_i to words 0..7 (low ALPHA_W bits, signed) before starting
// the conversion; a word must not be changed while it is being read. That the
// coefficients sit in on-chip memory reached from the processor is the
// original's arrangement; size and port timing are this design's choices.
module internal_memory #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk_a,
  input  logic                     rst_a_n,
  input  logic [$clog2(DEPTH)-1:0] avs_address,
  input  logic                     avs_read,
  input  logic                     avs_write,
  input  logic [WIDTH-1:0]         avs_writedata,
  output logic [WIDTH-1:0]         avs_readdata,
  output logic                     avs_readdatavalid,
  input  logic                     clk_b,
  input  logic [$clog2(DEPTH)-1:0] addr_b,
  output logic [WIDTH-1:0]         q_b
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_a) begin
    if (avs_write) mem[avs_address] <= avs_writedata;
    avs_readdata <= mem[avs_address];
  end

  always_ff @(posedge clk_a or negedge rst_a_n)
    if (!rst_a_n) avs_readdatavalid <= 1'b0;
    else          avs_readdatavalid <= avs_read;

  always_ff @(posedge clk_b) q_b <= mem[addr_b];
endmodule
