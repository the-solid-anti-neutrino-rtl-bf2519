// rand_trig: random trigger. A 32-bit Galois LFSR (taps 0x80200003, maximal
// length) advances every clock; 'fire' is high in a clock where the LFSR
// value is below 'rate', i.e. with probability rate/2^32 per clock, while
// enabled. Only the name "Random Trigger" is given; the generator is this
// design's choice.
module rand_trig (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic [31:0] rate,
  output logic        fire
);
  localparam logic [31:0] TAPS = 32'h8020_0003;
  logic [31:0] lfsr;

  always_ff @(posedge clk) begin
    if (rst) begin
      lfsr <= 32'h1;
      fire <= 1'b0;
    end else begin
      lfsr <= lfsr[0] ? ((lfsr >> 1) ^ TAPS) : (lfsr >> 1);
      fire <= en && (lfsr < rate);
    end
  end
endmodule
