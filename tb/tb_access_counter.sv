// tb_access_counter: self-checking test of the access counter.
//
// A requester that issues whenever allowed (with random gaps) runs against
// limits of 0 (unlimited), 10 and 37 accesses per 64-cycle window. Checked:
// no window sees more accesses than the limit; a saturating requester gets
// exactly the limit in each window; last_count reports the previous
// window's count; throttled cycles are counted.
module tb_access_counter;
  localparam int W = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [15:0] limit = '0, count, last_count;
  logic beat, allow;
  logic [31:0] n_throttled;
  logic want = 0;
  assign beat = want && allow;
  access_counter #(.WINDOW(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference window count, aligned to the counter's windows
  int cyc = 0, win_cnt = 0, prev_win = 0;
  always @(posedge clk) if (rst_n) begin
    if (cyc % W == W - 1) begin
      prev_win = win_cnt + int'(beat);
      win_cnt = 0;
    end else win_cnt += int'(beat);
    cyc++;
  end

  task automatic run(input int lim, input int busy_pct, input int windows);
    int th0;
    limit = 16'(lim);
    th0 = int'(n_throttled);
    // align to a window start
    while (cyc % W != 0) @(negedge clk);
    for (int w = 0; w < windows; w++) begin
      for (int c = 0; c < W; c++) begin
        @(negedge clk);
        want = int'($urandom % 100) < busy_pct;
      end
      #1;
      if (w > 0) begin
        check(int'(last_count) == prev_win, $sformatf("last_count %0d ref %0d", last_count, prev_win));
        if (lim != 0) check(prev_win <= lim, $sformatf("window used %0d > limit %0d", prev_win, lim));
        if (lim != 0 && busy_pct == 100) check(prev_win == lim, "saturating requester gets the limit");
        if (lim == 0 && busy_pct == 100) check(prev_win == W, "unlimited: every cycle");
      end
    end
    if (lim != 0 && busy_pct == 100) check(int'(n_throttled) > th0, "throttled cycles counted");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0, 100, 4);
    run(10, 100, 6);
    run(37, 70, 6);
    run(37, 100, 6);
    run(5, 20, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
