// deadtime_mon: deadtime monitor. Four 32-bit saturating counters of clock
// cycles: all cycles, cycles in which triggers are throttled by header/data
// buffer back pressure, cycles in which a readout is in progress, and cycles in
// which a channel derandomiser asserts back pressure. 'clear' zeroes all four.
// The three inputs are those drawn into the monitor in the firmware diagram;
// the counters are this design's choice.
module deadtime_mon (
  input  logic        clk,
  input  logic        rst,
  input  logic        clear,
  input  logic        throttle,
  input  logic        ro_busy,
  input  logic        derand_bp,
  output logic [31:0] n_total,
  output logic [31:0] n_throttle,
  output logic [31:0] n_busy,
  output logic [31:0] n_bp
);
  function automatic logic [31:0] sat_inc(logic [31:0] c, logic en);
    return (en && c != '1) ? c + 1 : c;
  endfunction

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      n_total    <= '0;
      n_throttle <= '0;
      n_busy     <= '0;
      n_bp       <= '0;
    end else begin
      n_total    <= sat_inc(n_total, 1'b1);
      n_throttle <= sat_inc(n_throttle, throttle);
      n_busy     <= sat_inc(n_busy, ro_busy);
      n_bp       <= sat_inc(n_bp, derand_bp);
    end
  end
endmodule
