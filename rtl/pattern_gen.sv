// pattern_gen: test pattern source for one channel.
// mode 0: a ramp that advances by one count per clock and wraps at 2^W;
// mode 1: the constant 'value'. The output is registered. Only the name of
// this source appears in the firmware block diagram; the two patterns are
// this design's choice.
module pattern_gen
  import solid_pkg::*;
#(
  parameter int W = SAMPLE_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         mode,
  input  logic [W-1:0] value,
  output logic [W-1:0] sample
);
  logic [W-1:0] ramp;
  always_ff @(posedge clk) begin
    if (rst) begin
      ramp   <= '0;
      sample <= '0;
    end else begin
      ramp   <= ramp + 1'b1;
      sample <= mode ? value : ramp;
    end
  end
endmodule
