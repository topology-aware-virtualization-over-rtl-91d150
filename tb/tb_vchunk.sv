// tb_vchunk: self-checking test of vChunk range translation.
//
// A reference RTT of 10 ranges (sorted by VA, sizes from 1 KB to 64 KB)
// sits between RTT_BASE=2 and RTT_END=11 in a memory model here. Each
// iteration of the simulated workload walks through the same 6 of the 10
// ranges with increasing addresses (the paper's patterns 2 and 3); 6
// ranges thrash the 4-entry range TLB so every range change misses.
// Checked: every translated address against a search of the table; that the
// first iteration records last_v in the table; that later iterations serve
// every miss with one RTT read through last_v, in 4 cycles; permission and
// not-mapped faults.
module tb_vchunk;
  import vnpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] rtt_base = 8'd2, rtt_end = 8'd11;
  logic flush = 0, req_valid = 0, req_write = 0, hit, fault;
  logic [VA_W-1:0] req_va = '0;
  logic [PA_W-1:0] pa;
  logic rtt_re, lv_we, lv_ready;
  logic [7:0] rtt_raddr, lv_idx, lv_data;
  rtt_entry_t rtt_rdata;
  logic [31:0] n_miss, n_rtt_reads, n_lastv_used;
  logic [7:0] rtt_cur;

  vchunk #(.TLB_ENTRIES(4), .RTT_ENTRIES(256)) dut (.*);

  // RTT memory model (synchronous read, last_v write port)
  rtt_entry_t rtt [256];
  always_ff @(posedge clk) begin
    if (rtt_re) rtt_rdata <= rtt[rtt_raddr];
    if (lv_we && lv_ready) rtt[lv_idx].last_v <= lv_data;
  end
  always_ff @(posedge clk) lv_ready <= ($urandom % 8) != 0;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_pa(input logic [47:0] va, input bit wr, output bit ok);
    ok = 0;
    for (int i = 2; i <= 11; i++)
      if (rtt[i].size != 0 && va >= rtt[i].va && va < rtt[i].va + 48'(rtt[i].size)) begin
        ok = wr ? rtt[i].perm[PERM_W_BIT] : rtt[i].perm[PERM_R];
        return longint'(rtt[i].pa + (va - rtt[i].va));
      end
    return -1;
  endfunction

  // translate one address; returns cycles from request to hit/fault
  task automatic xlate(input logic [47:0] va, input bit wr, output int lat, output bit flt);
    longint exp;
    bit ok;
    exp = ref_pa(va, wr, ok);
    @(negedge clk);
    req_valid = 1; req_va = va; req_write = wr;
    lat = 0;
    while (1) begin
      #1;
      if (hit || fault) break;
      @(negedge clk);
      lat++;
      if (lat > 100) break;
    end
    flt = fault;
    if (ok) check(hit && pa == 48'(exp), $sformatf("va %h -> pa %h expected %h", va, pa, exp));
    else    check(fault && !hit, $sformatf("va %h should fault", va));
    @(posedge clk);
    #1 req_valid = 0;
  endtask

  int used[6] = '{0, 2, 3, 5, 7, 9};   // offsets of the ranges one iteration uses
  initial begin
    logic [47:0] va;
    int lat, reads0, miss0, lv0;
    bit flt;
    // build the table: range k covers VA 0x10000*(k+1) .. + size
    for (int i = 0; i < 256; i++) rtt[i] = '0;
    for (int k = 0; k < 10; k++) begin
      rtt[2 + k].va     = 48'(32'h10000 * (k + 1));
      rtt[2 + k].pa     = 48'(32'h400000 + 32'h23000 * k);
      rtt[2 + k].size   = (k == 9) ? 32'h400 : 32'h10000 >> (k % 3);
      rtt[2 + k].perm   = (k == 5) ? 4'b0001 : 4'b0011;
      rtt[2 + k].last_v = LASTV_NULL;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4; it++) begin
      reads0 = int'(n_rtt_reads); miss0 = int'(n_miss); lv0 = int'(n_lastv_used);
      foreach (used[u]) begin
        int k;
        k = used[u];
        // several increasing addresses inside the range
        for (int s = 0; s < 4; s++) begin
          va = rtt[2 + k].va + 48'(s * (rtt[2 + k].size / 4));
          xlate(va, 1'b0, lat, flt);
          if (it >= 2 && s == 0)
            check(lat == 3, $sformatf("miss via last_v latency %0d (it %0d range %0d)", lat, it, k));
          if (s > 0) check(lat == 0, "hit in same range");
        end
      end
      $display("iteration %0d: misses %0d, RTT reads %0d, last_v used %0d", it,
               int'(n_miss) - miss0, int'(n_rtt_reads) - reads0, int'(n_lastv_used) - lv0);
      if (it >= 2) begin
        check(int'(n_miss) - miss0 == 6, "one miss per range");
        check(int'(n_rtt_reads) - reads0 == 6, "one RTT read per miss");
        check(int'(n_lastv_used) - lv0 == 6, "every miss served by last_v");
      end
      if (it == 0) check(int'(n_rtt_reads) - reads0 > 6, "first iteration scans");
    end
    // last_v chain recorded in the table
    foreach (used[u])
      check(rtt[2 + used[u]].last_v == 8'(2 + used[(u + 1) % 6]),
            $sformatf("last_v of entry %0d = %0d", 2 + used[u], rtt[2 + used[u]].last_v));
    check(rtt[2 + 1].last_v == LASTV_NULL, "untouched entry keeps NULL");
    // permission fault: write to a read-only range (k = 5)
    xlate(rtt[7].va + 48'h10, 1'b1, lat, flt);
    check(flt, "write to read-only range faults");
    // not mapped: between ranges / beyond the last one
    xlate(48'h10000 * 11 + 48'h500, 1'b0, lat, flt);
    check(flt, "unmapped address faults");
    // random addresses, reads and writes
    for (int n = 0; n < 300; n++) begin
      int k;
      k = int'($urandom % 10);
      va = rtt[2 + k].va + 48'($urandom % (rtt[2 + k].size + 32'h100));
      xlate(va, 1'($urandom), lat, flt);
    end
    // flush forgets everything; translation still works
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    xlate(rtt[4].va, 1'b0, lat, flt);
    check(!flt && lat > 3, "miss after flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
