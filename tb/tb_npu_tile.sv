// tb_npu_tile: self-checking test of one NPU core with its virtualization
// hardware (core 1 of a 4x2 mesh: left, right and bottom neighbours).
//
// The test plays the hyper-mode controller: it writes the core's h-REG
// (VMID 2, RTT entries 0..2), three RTT ranges (two read/write, one read
// only) and the routing table {v0 -> p1 (this core), v1 -> p2, v2 -> p0 with
// the predefined direction BOTTOM}. Then, through the instruction bus:
//   * DMA load of 64 lines (HBM data through vChunk into the weight SRAM);
//   * SEND to v0 with a RECV posted: the packet loops through the local
//     router port into another SRAM area; a DMA store writes it back to HBM
//     where it is compared with the source;
//   * a store into the read-only range faults; a SEND to a core outside the
//     VM is refused;
//   * SENDs to v1 and v2 leave on the right link and, by the predefined
//     direction, on the bottom link, with physical destinations 2 and 0;
//   * flits arriving on the left link are received into the SRAM;
//   * a configuration write for another core changes nothing here;
//   * after an h-REG rewrite (TLB flush) the same ranges are found through
//     last_v; with a limit of 4 accesses per 64-cycle window loads are
//     throttled; back-to-back DMA instructions stall the queue.
module tb_npu_tile;
  import vnpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [CORE_W-1:0] ME = 8'd1;
  logic tcfg_we = 0;
  logic [CORE_W-1:0] tcfg_core = '0;
  tile_cfg_sel_e tcfg_sel = TCFG_HREG;
  logic [7:0] tcfg_idx = '0;
  logic [META_W-1:0] tcfg_wdata = '0;
  logic ibus_valid = 0, ibus_ready;
  logic [CORE_W-1:0] ibus_core = '0;
  npu_inst_t ibus_inst = '0;
  logic [3:0] link_in_valid = '0, link_in_ready, link_out_valid, link_out_ready = '1;
  flit_t link_in_flit [4], link_out_flit [4];
  logic hbm_req_valid, hbm_req_ready, hbm_req_we, hbm_rsp_valid, hbm_rsp_ready;
  logic [PA_W-1:0] hbm_req_addr;
  logic [LINE_W-1:0] hbm_req_wdata, hbm_rsp_data;
  logic [SPAD_AW-1:0] hbm_req_tag, hbm_rsp_tag;
  hreg_t hreg;
  logic dma_done, dma_fault, snd_done, snd_fault, rcv_done;
  logic [31:0] n_stall, n_override, n_dor, n_tlb_miss, n_rtt_reads, n_lastv_used,
               n_throttled, n_sent, n_recv, n_refused;
  logic [15:0] mem_beats_last;

  npu_tile #(.WINDOW(64)) dut (.clk, .rst_n, .my_id(ME), .*);

  hbm_model #(.LAT(6)) u_hbm (
    .clk, .rst_n, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready), .req_we(hbm_req_we),
    .req_addr(hbm_req_addr), .req_wdata(hbm_req_wdata), .req_tag(hbm_req_tag),
    .rsp_valid(hbm_rsp_valid), .rsp_ready(hbm_rsp_ready), .rsp_tag(hbm_rsp_tag),
    .rsp_data(hbm_rsp_data));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_dma_done = 0, n_dma_fault = 0, n_snd_done = 0, n_snd_fault = 0, n_rcv_done = 0;
  always @(negedge clk) begin
    n_dma_done  += int'(dma_done);
    n_dma_fault += int'(dma_fault);
    n_snd_done  += int'(snd_done);
    n_snd_fault += int'(snd_fault);
    n_rcv_done  += int'(rcv_done);
  end
  // flits leaving on the mesh links
  int out_n [4], out_bad [4];
  int exp_pcore [4];
  always @(negedge clk) for (int k = 0; k < 4; k++)
    if (link_out_valid[k] && link_out_ready[k]) begin
      out_n[k]++;
      if (int'(link_out_flit[k].dst_pcore) != exp_pcore[k] || link_out_flit[k].vmid != 4'd2 ||
          link_out_flit[k].src_pcore != ME) out_bad[k]++;
    end

  task automatic cfg(input int core, input tile_cfg_sel_e sel, input int idx, input logic [META_W-1:0] d);
    @(negedge clk);
    tcfg_we = 1; tcfg_core = CORE_W'(core); tcfg_sel = sel; tcfg_idx = 8'(idx); tcfg_wdata = d;
    @(negedge clk);
    tcfg_we = 0;
  endtask
  function automatic logic [META_W-1:0] rte(input int p, input dir_e d);
    noc_rt_entry_t r;
    r = '{valid: 1'b1, pcore: CORE_W'(p), dir: d};
    return META_W'(r);
  endfunction
  task automatic set_hreg(input int lim);
    hreg_t h;
    h = '{vmid: 4'd2, rt_base: 8'd0, rt_count: 8'd3, rtt_base: 8'd0, rtt_end: 8'd2, rate_limit: 16'(lim)};
    cfg(ME, TCFG_HREG, 0, META_W'(h));
  endtask
  task automatic inst(input opcode_e op, input int spad, input int len, input int step,
                      input logic [47:0] va, input int dst);
    @(negedge clk);
    ibus_valid = 1; ibus_core = ME;
    ibus_inst = '{op: op, core: ME, spad: 16'(spad), len: 16'(len), step: 16'(step),
                  va: va, dst_vcore: 8'(dst)};
    do @(posedge clk); while (!ibus_ready);
    #1 ibus_valid = 0;
  endtask
  task automatic wait_n(ref int cnt, input int target);
    while (cnt < target) @(negedge clk);
  endtask

  localparam logic [47:0] VA0 = 48'h10000, PA0 = 48'h800000;
  localparam logic [47:0] VA1 = 48'h20000, PA1 = 48'h900000;
  localparam logic [47:0] VA2 = 48'h30000, PA2 = 48'hA00000;

  initial begin
    int bad, d0, m0, l0, st0, th0;
    rtt_entry_t e;
    for (int k = 0; k < 4; k++) begin
      link_in_flit[k] = '0; out_n[k] = 0; out_bad[k] = 0; exp_pcore[k] = -1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    set_hreg(0);
    e = '{va: VA0, pa: PA0, size: 32'h1000, perm: 4'b0011, last_v: LASTV_NULL};
    cfg(ME, TCFG_RTT, 0, META_W'(e));
    e = '{va: VA1, pa: PA1, size: 32'h2000, perm: 4'b0001, last_v: LASTV_NULL};
    cfg(ME, TCFG_RTT, 1, META_W'(e));
    e = '{va: VA2, pa: PA2, size: 32'h1000, perm: 4'b0011, last_v: LASTV_NULL};
    cfg(ME, TCFG_RTT, 2, META_W'(e));
    cfg(ME, TCFG_RT, 0, rte(1, DIR_NULL));
    cfg(ME, TCFG_RT, 1, rte(2, DIR_NULL));
    cfg(ME, TCFG_RT, 2, rte(0, DIR_BOTTOM));
    // write meant for core 3
    begin
      hreg_t h3;
      h3 = '{vmid: 4'd9, rt_base: 8'd0, rt_count: 8'd0, rtt_base: 8'd5, rtt_end: 8'd9, rate_limit: 16'd1};
      cfg(3, TCFG_HREG, 0, META_W'(h3));
    end
    check(hreg.vmid == 4'd2 && hreg.rate_limit == 16'd0, "other core's configuration ignored");

    // 1) DMA load 64 lines from range 0
    inst(OP_DMA_LOAD, 0, 64, 1, VA0, 0);
    wait_n(n_dma_done, 1);
    bad = 0;
    for (int i = 0; i < 64; i++) if (dut.u_sram.mem[i] != u_hbm.peek(PA0 + 48'(16 * i))) bad++;
    check(bad == 0, $sformatf("DMA load: %0d lines wrong", bad));

    // 2) loop-back through the local router port, then store to range 2
    inst(OP_RECV, 1000, 64, 1, '0, 0);
    inst(OP_SEND, 0, 64, 1, '0, 0);
    wait_n(n_rcv_done, 1);
    inst(OP_DMA_STORE, 1000, 64, 1, VA2, 0);
    wait_n(n_dma_done, 2);
    repeat (20) @(negedge clk);
    bad = 0;
    for (int i = 0; i < 64; i++) if (u_hbm.peek(PA2 + 48'(16 * i)) != u_hbm.peek(PA0 + 48'(16 * i))) bad++;
    check(bad == 0, $sformatf("loop-back and store: %0d lines wrong", bad));
    check(n_dma_fault == 0 && n_snd_fault == 0, "no faults so far");

    // 3) store into the read-only range; send outside the VM
    inst(OP_DMA_STORE, 0, 4, 1, VA1, 0);
    wait_n(n_dma_done, 3);
    check(n_dma_fault == 1, "store to read-only range faults");
    inst(OP_SEND, 0, 4, 1, '0, 7);
    wait_n(n_snd_done, 2);
    check(n_snd_fault == 1 && n_refused == 1, "send outside the VM refused");

    // 4) sends leaving the core: right link (v1 -> p2), bottom by override (v2 -> p0)
    exp_pcore[1] = 2; exp_pcore[3] = 0;
    inst(OP_SEND, 0, 8, 1, '0, 1);
    inst(OP_SEND, 8, 8, 1, '0, 2);
    wait_n(n_snd_done, 4);
    repeat (5) @(negedge clk);
    check(out_n[1] == 8 && out_bad[1] == 0, $sformatf("right link: %0d flits, %0d bad", out_n[1], out_bad[1]));
    check(out_n[3] == 8 && out_bad[3] == 0, $sformatf("bottom link: %0d flits, %0d bad", out_n[3], out_bad[3]));
    check(out_n[0] == 0 && out_n[2] == 0, "nothing on left/top links");
    check(n_override == 8, $sformatf("override used %0d times", n_override));

    // 5) flits from the left neighbour
    inst(OP_RECV, 3000, 4, 2, '0, 0);
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      link_in_valid[0] = 1;
      link_in_flit[0] = '{vmid: 4'd2, dst_vcore: 8'd0, dst_pcore: ME, src_pcore: 8'd0,
                          last: i == 3, data: 128'(i) * 128'h1111};
      do @(posedge clk); while (!link_in_ready[0]);
      #1 link_in_valid[0] = 0;
    end
    wait_n(n_rcv_done, 2);
    bad = 0;
    for (int i = 0; i < 4; i++) if (dut.u_sram.mem[3000 + 2 * i] != 128'(i) * 128'h1111) bad++;
    check(bad == 0, "flits from the left link received");

    // 6) flush, then ranges 0 and 2 again: the second is found through last_v
    set_hreg(0);
    l0 = int'(n_lastv_used);
    m0 = int'(n_tlb_miss);
    inst(OP_DMA_LOAD, 0, 2, 1, VA0, 0);
    inst(OP_DMA_LOAD, 2, 2, 1, VA2, 0);
    wait_n(n_dma_done, 5);
    check(int'(n_tlb_miss) == m0 + 2, "two misses after the flush");
    check(int'(n_lastv_used) >= l0 + 1, "last_v used after the flush");

    // 7) rate limit: 4 accesses per 64-cycle window
    set_hreg(4);
    th0 = int'(n_throttled);
    st0 = int'(n_stall);
    d0 = n_dma_done;
    inst(OP_DMA_LOAD, 100, 24, 1, VA0, 0);
    inst(OP_DMA_LOAD, 200, 8, 1, VA0 + 48'h400, 0);
    wait_n(n_dma_done, d0 + 2);
    check(int'(n_throttled) > th0, "loads throttled");
    check(mem_beats_last <= 16'd4, $sformatf("window used %0d > 4", mem_beats_last));
    check(int'(n_stall) > st0, "queue stalled behind a busy DMA");
    bad = 0;
    for (int i = 0; i < 8; i++) if (dut.u_sram.mem[200 + i] != u_hbm.peek(PA0 + 48'h400 + 48'(16 * i))) bad++;
    check(bad == 0, "throttled load data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
