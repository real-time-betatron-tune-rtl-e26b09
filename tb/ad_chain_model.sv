// ad_chain_model: behavioural model (not synthesizable) of a daisy chain of
// AD boards, each an 8-channel 16-bit ADS8568 behind optical ports.
//
// A rising Conversion Start latches the codes on `values` (board b, channel c
// at index b*N_CH+c) and starts a CONV_NS conversion. A rising Chip Select
// loads the whole chain: board 0 channel 0 MSB is on sdo at once, and each
// falling edge of sclk moves to the next bit, through all channels of board
// 0 and then those of the boards behind it. Chip Select rising before the
// conversion is over counts in early_reads; clock edges outside Chip Select
// are ignored.
module ad_chain_model #(
  parameter int unsigned N_BOARDS = 4,
  parameter int unsigned N_CH     = 8,
  parameter realtime     CONV_NS  = 1700ns
) (
  input  logic conv_start,
  input  logic sclk,
  input  logic cs,
  output logic sdo,
  input  logic [N_BOARDS*N_CH-1:0][15:0] values,
  output int   early_reads,
  output int   conversions
);
  logic [N_BOARDS*N_CH-1:0][15:0] latched;
  logic [N_BOARDS*N_CH*16-1:0] sh;
  realtime t_conv;

  initial begin
    early_reads = 0; conversions = 0; sdo = 1'b0; t_conv = 0; latched = '0; sh = '0;
  end

  always @(posedge conv_start) begin
    latched = values; t_conv = $realtime; conversions++;
  end

  always @(posedge cs) begin
    if ($realtime - t_conv < CONV_NS) early_reads++;
    // index 0 (board 0, channel 0) goes out first
    for (int k = 0; k < N_BOARDS*N_CH; k++) sh[N_BOARDS*N_CH*16-1-16*k -: 16] = latched[k];
    sdo = sh[N_BOARDS*N_CH*16-1];
  end

  always @(negedge sclk) if (cs) begin
    sh  = {sh[N_BOARDS*N_CH*16-2:0], 1'b0};
    sdo = sh[N_BOARDS*N_CH*16-1];
  end
endmodule
