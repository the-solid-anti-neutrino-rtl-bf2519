// tb_cro: the readout controller against a queue model of the window buffer
// and a derandomiser whose 'full' toggles at random. For random block lists
// and windows it checks the exact word sequence written (header, 16 samples per
// block inside the window, trailer with the block count), that blocks before
// the window are released unread, that blocks after it stay, that nothing is
// written while full, that lock covers the readout, and that with no block
// after the window the readout waits for the data stream to pass the window.
module tb_cro;
  import solid_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  localparam int BLK = 16;
  logic ro_req, head_valid, pop, lock, wr_en, full, busy, done;
  ro_window_t win; ts_t cur_ts, head_ts; logic [3:0] rd_idx; logic [13:0] rd_data; word_t wr_data;
  cro #(.BLK(BLK)) dut (.clk, .rst, .chan_id(6'd37), .ro_req, .win, .cur_ts, .head_valid, .head_ts,
    .rd_idx, .rd_data, .pop, .lock, .wr_en, .wr_data, .full, .busy, .done);

  typedef struct { ts_t ts; logic [13:0] s [BLK]; } blk_t;
  blk_t  q [$];
  word_t got [$];
  word_t exp [$];
  bit    rand_full;

  assign head_valid = q.size() > 0;
  assign head_ts    = (q.size() > 0) ? q[0].ts : '0;
  assign rd_data    = (q.size() > 0) ? q[0].s[rd_idx] : '0;

  always @(posedge clk) begin
    if (!rst) begin
      if (wr_en) begin
        chk(!full, "write while full");
        got.push_back(wr_data);
      end
      if (pop) begin
        chk(q.size() > 0 && lock, "pop");
        void'(q.pop_front());
      end
      full   <= rand_full ? 1'($urandom_range(0, 2) == 0) : 1'b0;
      cur_ts <= cur_ts + 1;
    end
  end

  initial begin
    ro_req = 0; win = '0; full = 0; rand_full = 1; cur_ts = 48'd100000;
    @(posedge clk); #1; rst = 0;
    for (int ev = 0; ev < 60; ev++) begin
      ts_t t; int nb, n_in, left_after; bit tail_blocks;
      q.delete(); got.delete(); exp.delete();
      t = 48'd1000 + 48'($urandom_range(0, 50)) * 16;
      nb = $urandom_range(0, 30);
      tail_blocks = (ev % 3 != 0);
      win.t_start = 48'd1000 + 48'($urandom_range(0, 400));
      win.t_end   = win.t_start + 48'($urandom_range(0, 400));
      for (int b = 0; b < nb; b++) begin
        blk_t x; x.ts = t; t += 48'(16 * $urandom_range(1, 3));
        foreach (x.s[k]) x.s[k] = 14'($urandom);
        if (!tail_blocks && x.ts > win.t_end) break;
        q.push_back(x);
      end
      n_in = 0; left_after = 0;
      foreach (q[i]) begin
        if (q[i].ts + 15 < win.t_start) continue;
        if (q[i].ts > win.t_end) begin left_after = q.size() - i; break; end
        exp.push_back({W_BLKHDR, q[i].ts[29:0]});
        for (int k = 0; k < BLK; k++) exp.push_back({W_SAMPLE, 6'd37, 10'd0, q[i].s[k]});
        n_in++;
      end
      exp.push_back({W_TRAILER, 6'd37, 8'd0, 16'(n_in)});
      cur_ts = win.t_end - 48'd100;   // data stream has not yet passed the window
      ro_req = 1; @(posedge clk); #1; ro_req = 0;
      chk(lock && busy, "lock during readout");
      fork
        begin wait (done); end
        begin repeat (5000) @(posedge clk); end
      join_any
      disable fork;
      @(posedge clk); #1;
      chk(!busy, "idle after done");
      chk(got.size() == exp.size(), $sformatf("event %0d: %0d words, expected %0d", ev, got.size(), exp.size()));
      foreach (exp[i]) if (i < got.size()) chk(got[i] == exp[i], $sformatf("event %0d word %0d: %h vs %h", ev, i, got[i], exp[i]));
      chk(q.size() == left_after, "blocks after the window stay");
      if (left_after == 0) chk(cur_ts > win.t_end + 48'(2*BLK), "waited for the stream to pass the window");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
