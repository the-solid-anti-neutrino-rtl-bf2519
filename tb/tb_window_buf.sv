// tb_window_buf: window buffer of 8 blocks of 16 samples. Random sequences of
// block writes (back to back or with gaps), pops and lock on/off are checked
// against a queue model: head time stamp and every sample of the head block,
// the block count, the overwrite of the oldest block when full and unlocked,
// and the dropping of new blocks when full and locked.
module tb_window_buf;
  import solid_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  localparam int BLK = 16, NBLK = 8;
  logic [13:0] din, rd_data; logic din_valid, din_first, lock, head_valid, pop;
  ts_t din_ts, head_ts; logic [3:0] rd_idx; logic [3:0] n_blocks; logic [31:0] n_ovw, n_ovf;
  window_buf #(.DEPTH(NBLK*BLK), .BLK(BLK)) dut (.clk, .rst, .din, .din_valid, .din_first, .din_ts,
    .lock, .head_valid, .head_ts, .rd_idx, .rd_data, .pop, .n_blocks, .n_overwritten(n_ovw), .n_overflow(n_ovf));

  typedef struct { ts_t ts; logic [13:0] s [BLK]; } blk_t;
  blk_t q [$];
  int   exp_ovw = 0, exp_ovf = 0;
  ts_t  tnext = 48'd5000;

  task automatic check_head();
    chk(head_valid == (q.size() > 0), "head_valid");
    chk(int'(n_blocks) == q.size(), $sformatf("n_blocks %0d vs %0d", n_blocks, q.size()));
    if (q.size() > 0) begin
      chk(head_ts == q[0].ts, "head_ts");
      for (int k = 0; k < BLK; k++) begin
        rd_idx = 4'(k); #0;
        #1 chk(rd_data == q[0].s[k], $sformatf("head sample %0d", k));
      end
    end
  endtask

  task automatic write_block();
    blk_t b; bit dropped;
    b.ts = tnext; tnext += 48'(BLK * (1 + $urandom_range(0, 3)));
    foreach (b.s[k]) b.s[k] = 14'($urandom);
    dropped = 0;
    if (q.size() == NBLK) begin
      if (lock) begin dropped = 1; exp_ovf++; end
      else begin void'(q.pop_front()); exp_ovw++; end
    end
    for (int k = 0; k < BLK; k++) begin
      din = b.s[k]; din_valid = 1; din_first = (k == 0); din_ts = b.ts + 48'(k);
      @(posedge clk); #1;
    end
    din_valid = 0; din_first = 0;
    if (!dropped) q.push_back(b);
  endtask

  initial begin
    din = 0; din_valid = 0; din_first = 0; din_ts = 0; lock = 0; pop = 0; rd_idx = 0;
    @(posedge clk); #1; rst = 0;
    check_head();
    for (int it = 0; it < 600; it++) begin
      int r; r = $urandom_range(0, 9);
      if (r < 5) write_block();
      else if (r < 8) begin
        if (q.size() > 0) begin
          check_head();
          pop = 1; @(posedge clk); #1; pop = 0;
          void'(q.pop_front());
        end
      end else begin
        lock = !lock;
      end
      check_head();
    end
    chk(n_ovw == 32'(exp_ovw) && exp_ovw > 0, $sformatf("overwrites %0d vs %0d", n_ovw, exp_ovw));
    chk(n_ovf == 32'(exp_ovf) && exp_ovf > 0, $sformatf("overflows %0d vs %0d", n_ovf, exp_ovf));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
