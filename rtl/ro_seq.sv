// ro_seq: readout sequencer, with its input multiplexer.
// Readout requests come from the local trigger sequencer and from the remote
// trigger; each source has a one-deep pending slot (a request that finds its
// slot full is dropped and counted), and local requests go first. One readout
// runs at a time. It does not start while any derandomiser asserts back
// pressure ('bp'). Starting a readout: the window [ts-PRE, ts+POST] is
// computed (clamped at 0), 'ro_req' pulses to every channel readout controller
// with the window, and a 64-bit event record goes to the header buffer. The
// readout ends when every channel has pulsed 'cro_done' and the record has
// been taken. PRE = POST = 20000 clocks gives the paper's ~1 ms window centred
// on the trigger at 40 MHz; the arbitration is this design's choice.
module ro_seq
  import solid_pkg::*;
#(
  parameter int NCHAN = 64,
  parameter int PRE   = 20000,
  parameter int POST  = 20000
) (
  input  logic             clk,
  input  logic             rst,
  input  trig_t            local_trig,
  input  trig_t            remote_trig,
  input  logic             bp,
  output logic             ro_req,
  output ro_window_t       win,
  input  logic [NCHAN-1:0] cro_done,
  output logic             rec_valid,
  output rec_t             rec,
  input  logic             rec_ready,
  output logic             busy,
  output logic [31:0]      n_events,
  output logic [31:0]      n_dropped
);
  trig_t            pl, pr, sel;
  logic [NCHAN-1:0] done_acc;
  logic             take_l, take_r;

  assign sel    = pl.valid ? pl : pr;
  assign take_l = !busy && !bp && pl.valid;
  assign take_r = !busy && !bp && !pl.valid && pr.valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      pl        <= '0;
      pr        <= '0;
      busy      <= 1'b0;
      ro_req    <= 1'b0;
      win       <= '0;
      rec_valid <= 1'b0;
      rec       <= '0;
      done_acc  <= '0;
      n_events  <= '0;
      n_dropped <= '0;
    end else begin
      ro_req <= 1'b0;
      if (rec_valid && rec_ready) rec_valid <= 1'b0;
      // pending slots
      if (take_l) pl.valid <= 1'b0;
      if (take_r) pr.valid <= 1'b0;
      if (local_trig.valid) begin
        if (!pl.valid || take_l) pl <= local_trig;
        else                     n_dropped <= n_dropped + 1;
      end
      if (remote_trig.valid) begin
        if (!pr.valid || take_r) pr <= remote_trig;
        else                     n_dropped <= n_dropped + 1;
      end
      // sequencing
      if (take_l || take_r) begin
        busy        <= 1'b1;
        ro_req      <= 1'b1;
        win.t_start <= (sel.ts > ts_t'(PRE)) ? sel.ts - ts_t'(PRE) : '0;
        win.t_end   <= sel.ts + ts_t'(POST);
        rec         <= '{tag: REC_EVENT, kind: sel.ttype, spare: '0, ts: sel.ts};
        rec_valid   <= 1'b1;
        done_acc    <= '0;
      end else if (busy) begin
        done_acc <= done_acc | cro_done;
        if (&(done_acc | cro_done) && !rec_valid) begin
          busy     <= 1'b0;
          n_events <= n_events + 1;
        end
      end
    end
  end
endmodule
