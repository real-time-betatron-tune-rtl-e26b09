// bit_sync: two flip-flop synchroniser for a level signal (control bits,
// external triggers) entering a clock domain. Output follows the input two to
// three destination cycles later; it resets to 0.
module bit_sync (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);
  logic s1;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin s1 <= 1'b0; q <= 1'b0; end
    else        begin s1 <= d;    q <= s1;   end
endmodule
