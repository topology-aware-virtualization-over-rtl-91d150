// tb_meta_zone: self-checking test of the meta-zone tables.
//
// Fills the routing table and the RTT with random entries through the
// configuration port, reads them back through every routing-table port and
// the synchronous RTT port and compares with a copy kept here; then updates
// last_v fields from the core side, checks that only last_v changed, and
// that a simultaneous configuration write to the RTT takes priority.
module tb_meta_zone;
  import vnpu_pkg::*;
  localparam int NRD = NPORTS + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0;
  tile_cfg_sel_e cfg_sel = TCFG_RT;
  logic [7:0] cfg_idx = '0;
  logic [META_W-1:0] cfg_wdata = '0;
  logic [6:0] rt_idx [NRD];
  noc_rt_entry_t rt_entry [NRD];
  logic rtt_re = 0;
  logic [7:0] rtt_raddr = '0;
  rtt_entry_t rtt_rdata;
  logic lv_we = 0, lv_ready;
  logic [7:0] lv_idx = '0, lv_data = '0;

  meta_zone #(.RT_ENTRIES(128), .RTT_ENTRIES(256)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  noc_rt_entry_t rt_ref [128];
  rtt_entry_t rtt_ref [256];

  task automatic rtt_read(input int i, output rtt_entry_t e);
    @(negedge clk); rtt_re = 1; rtt_raddr = 8'(i);
    @(negedge clk); rtt_re = 0; e = rtt_rdata;
  endtask

  initial begin
    rtt_entry_t e;
    for (int r = 0; r < NRD; r++) rt_idx[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // routing table after reset: all invalid
    @(negedge clk);
    for (int r = 0; r < NRD; r++) rt_idx[r] = 7'($urandom);
    #1 for (int r = 0; r < NRD; r++) check(!rt_entry[r].valid, "RT invalid after reset");
    for (int i = 0; i < 128; i++) begin
      rt_ref[i] = '{valid: 1'($urandom), pcore: 8'($urandom), dir: dir_e'(3'($urandom % 5))};
      @(negedge clk); cfg_we = 1; cfg_sel = TCFG_RT; cfg_idx = 8'(i);
      cfg_wdata = '0; cfg_wdata[$bits(noc_rt_entry_t)-1:0] = rt_ref[i];
    end
    for (int i = 0; i < 256; i++) begin
      rtt_ref[i] = '{va: {$urandom, $urandom}, pa: {$urandom, $urandom}, size: $urandom,
                     perm: 4'($urandom), last_v: 8'($urandom)};
      @(negedge clk); cfg_we = 1; cfg_sel = TCFG_RTT; cfg_idx = 8'(i);
      cfg_wdata = '0; cfg_wdata[$bits(rtt_entry_t)-1:0] = rtt_ref[i];
    end
    @(negedge clk); cfg_we = 0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      for (int r = 0; r < NRD; r++) rt_idx[r] = 7'($urandom);
      #1 for (int r = 0; r < NRD; r++)
        check(rt_entry[r] == rt_ref[rt_idx[r]], $sformatf("RT port %0d entry %0d", r, rt_idx[r]));
    end
    for (int n = 0; n < 100; n++) begin
      int i;
      i = int'($urandom % 256);
      rtt_read(i, e);
      check(e == rtt_ref[i], $sformatf("RTT entry %0d", i));
    end
    // last_v updates from the core
    for (int n = 0; n < 50; n++) begin
      int i;
      i = int'($urandom % 256);
      @(negedge clk); lv_we = 1; lv_idx = 8'(i); lv_data = 8'($urandom);
      #1 check(lv_ready, "lv_ready without config write");
      rtt_ref[i].last_v = lv_data;
      @(negedge clk); lv_we = 0;
      rtt_read(i, e);
      check(e == rtt_ref[i], $sformatf("RTT entry %0d after last_v update", i));
    end
    // configuration write wins over a last_v update in the same cycle
    @(negedge clk);
    lv_we = 1; lv_idx = 8'd7; lv_data = 8'h55;
    cfg_we = 1; cfg_sel = TCFG_RTT; cfg_idx = 8'd7; cfg_wdata = '0;
    rtt_ref[7] = '{va: 48'h10000, pa: 48'h20000, size: 32'h10000, perm: 4'b0011, last_v: LASTV_NULL};
    cfg_wdata[$bits(rtt_entry_t)-1:0] = rtt_ref[7];
    #1 check(!lv_ready, "lv_ready low during config write");
    @(negedge clk); lv_we = 0; cfg_we = 0;
    rtt_read(7, e);
    check(e == rtt_ref[7], "config write has priority");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
