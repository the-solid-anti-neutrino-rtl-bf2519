// chan_trig: per-channel neutron trigger by peak counting.
// Runs on the undelayed stream, in parallel with the latency buffer. Each
// sample has the pedestal removed; a peak is a sample that is higher than the
// sample before it and not lower than the sample after it (the derivative turns
// from positive to zero or negative) and that is more than 'peak_thr' above
// the pedestal. Peaks are
// counted over a rolling window of the last WIN samples (a WIN-bit shift
// register and an up/down counter). 'fire' pulses for one clock when the count
// reaches 'npk_thr'; it cannot pulse again until the count has dropped below.
// Counting peaks in a rolling window is the paper's method (ZnS neutron light
// gives many more peaks than PVT light); the peak rule, the window length and
// the pipeline are this design's choice. Latency: a peak at sample t is counted
// two clocks after t entered.
module chan_trig
  import solid_pkg::*;
#(
  parameter int W     = SAMPLE_W,
  parameter int WIN   = 256,
  localparam int CW   = $clog2(WIN + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [W-1:0]  din,
  input  logic          din_valid,
  input  logic [W-1:0]  pedestal,
  input  logic [W-1:0]  peak_thr,
  input  logic [CW-1:0] npk_thr,
  output logic          fire,
  output logic [CW-1:0] npeaks
);
  logic signed [W:0] x0, x1;      // current and previous pedestal-subtracted sample
  logic              rising;      // x1 > previous of x1
  logic              primed;
  logic [WIN-1:0]    hist;
  logic              peak;
  logic              armed;

  assign peak = primed && rising && (x0 <= x1) && (x1 > $signed({1'b0, peak_thr}));

  always_ff @(posedge clk) begin
    if (rst) begin
      x0     <= '0;
      x1     <= '0;
      rising <= 1'b0;
      primed <= 1'b0;
      hist   <= '0;
      npeaks <= '0;
      fire   <= 1'b0;
      armed  <= 1'b1;
    end else begin
      fire <= 1'b0;
      if (din_valid) begin
        x0     <= $signed({1'b0, din}) - $signed({1'b0, pedestal});
        x1     <= x0;
        rising <= (x0 > x1);
        primed <= 1'b1;
        hist   <= {hist[WIN-2:0], peak};
        npeaks <= npeaks + CW'(peak) - CW'(hist[WIN-1]);
      end
      if (npeaks >= npk_thr && npk_thr != '0) begin
        if (armed) fire <= 1'b1;
        armed <= 1'b0;
      end else begin
        armed <= 1'b1;
      end
    end
  end
endmodule
