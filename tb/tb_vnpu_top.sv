// tb_vnpu_top: end-to-end test of the virtualised NPU at its default size
// (eight cores as a 4x2 mesh, 512 KB weight SRAM per core).
//
// The test plays the hypervisor and two guests. Physical cores, row-major:
//      0  1  2  3
//      4  5  6  7
// Virtual NPU 1 (VF 0, VMID 1) is a 2x2 mesh on cores 0,1,4,5 described by a
// single 2D-mesh routing-table entry. Virtual NPU 2 (VF 1, VMID 2) has an
// irregular shape, v0 -> p2, v1 -> p3, v2 -> p7, with a standard table.
// Core 6 belongs to no one. Under dimension-order routing a packet from p7
// to p2 would cross p6; core 7's table gives the direction TOP for v0 so the
// packet goes p7 -> p3 -> p2 and stays inside virtual NPU 2. The two VMs
// use the same virtual addresses, mapped by vChunk to different physical
// memory. The cores' NoC routing tables sit at different places in the
// meta-zone (entry 0 for VM 1, entry 16 for VM 2), given by each core's
// h-REG together with the table's entry count.
//
// Operations: (1) in VM 1, v0 loads 32 lines and sends them to v1, which
// stores them to HBM; (2) in VM 2, v2 loads and sends to v0, which stores
// them; (3) VM 2 reads its own memory at the same virtual address as VM 1;
// then isolation and limit cases. Data is compared with the HBM models.
// Every mechanism is counted and a failure is counted for any that never
// happened: non-hyper write rejected, translation reuse and table lookup,
// instruction to a foreign core dropped, dimension-order hop, predefined
// direction, TLB miss, last_v hit, permission fault, send refusal,
// throttling, queue stall, flits sent and received.
module tb_vnpu_top;
  import vnpu_pkg::*;
  localparam int N = 8, NV = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_valid = 0, cfg_hyper = 0, cfg_reject;
  cfg_addr_t cfg_addr = '0;
  logic [META_W-1:0] cfg_wdata = '0;
  logic [NV-1:0] vf_valid = '0, vf_ready, vf_fault;
  npu_inst_t vf_inst [NV];
  logic [N-1:0] hbm_req_valid, hbm_req_ready, hbm_req_we, hbm_rsp_valid, hbm_rsp_ready;
  logic [PA_W-1:0] hbm_req_addr [N];
  logic [LINE_W-1:0] hbm_req_wdata [N], hbm_rsp_data [N];
  logic [SPAD_AW-1:0] hbm_req_tag [N], hbm_rsp_tag [N];
  logic [N-1:0] dma_done, dma_fault, snd_done, snd_fault, rcv_done;
  logic [31:0] n_cfg_rejected, n_lookups, n_reuse, n_inst_fault, n_dispatched;
  logic [31:0] n_stall [N], n_override [N], n_dor [N], n_tlb_miss [N], n_lastv_used [N],
               n_throttled [N], n_sent [N], n_recv [N];

  vnpu_top dut (.*);

  for (genvar i = 0; i < N; i++) begin : g_hbm
    hbm_model #(.LAT(8)) u (
      .clk, .rst_n, .req_valid(hbm_req_valid[i]), .req_ready(hbm_req_ready[i]),
      .req_we(hbm_req_we[i]), .req_addr(hbm_req_addr[i]), .req_wdata(hbm_req_wdata[i]),
      .req_tag(hbm_req_tag[i]), .rsp_valid(hbm_rsp_valid[i]), .rsp_ready(hbm_rsp_ready[i]),
      .rsp_tag(hbm_rsp_tag[i]), .rsp_data(hbm_rsp_data[i]));
  end

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

  // completion pulses per core
  int c_dma [N], c_dfault [N], c_snd [N], c_sfault [N], c_rcv [N], c_vffault [NV];
  always @(negedge clk) begin
    for (int i = 0; i < N; i++) begin
      c_dma[i]    += int'(dma_done[i]);
      c_dfault[i] += int'(dma_fault[i]);
      c_snd[i]    += int'(snd_done[i]);
      c_sfault[i] += int'(snd_fault[i]);
      c_rcv[i]    += int'(rcv_done[i]);
    end
    for (int v = 0; v < NV; v++) c_vffault[v] += int'(vf_fault[v]);
  end

  task automatic wr(input bit hyper, input cfg_region_e r, input int core, input int idx,
                    input logic [META_W-1:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg_hyper = hyper;
    cfg_addr = '{region: r, core: CORE_W'(core), index: CORE_W'(idx)};
    cfg_wdata = d;
    @(negedge clk);
    cfg_valid = 0; cfg_hyper = 0;
  endtask
  function automatic logic [META_W-1:0] rte(input int p, input dir_e d);
    noc_rt_entry_t r;
    r = '{valid: 1'b1, pcore: CORE_W'(p), dir: d};
    return META_W'(r);
  endfunction
  function automatic logic [META_W-1:0] rtt(input logic [47:0] va, input logic [47:0] pa,
                                            input int size, input logic [3:0] perm);
    rtt_entry_t e;
    e = '{va: va, pa: pa, size: 32'(size), perm: perm, last_v: LASTV_NULL};
    return META_W'(e);
  endfunction
  // VM 1's routing tables sit at meta-zone entry 0, VM 2's at entry 16
  task automatic hreg(input int core, input int vmid, input int rtt_end, input int lim);
    hreg_t h;
    h = '{vmid: VMID_W'(vmid), rt_base: (vmid == 2) ? 8'd16 : 8'd0, rt_count: (vmid == 2) ? 8'd3 : 8'd4,
          rtt_base: 8'd0, rtt_end: 8'(rtt_end), rate_limit: 16'(lim)};
    wr(1, CFG_HREG, core, 0, META_W'(h));
  endtask

  task automatic issue(input int vf, input opcode_e op, input int vcore, input int spad,
                       input int len, input logic [47:0] va, input int dst);
    @(negedge clk);
    vf_valid[vf] = 1;
    vf_inst[vf] = '{op: op, core: CORE_W'(vcore), spad: 16'(spad), len: 16'(len), step: 16'd1,
                    va: va, dst_vcore: CORE_W'(dst)};
    do @(posedge clk); while (!vf_ready[vf]);
    #1 vf_valid[vf] = 0;
  endtask
  task automatic wait_cnt(ref int cnt [N], input int core, input int target);
    while (cnt[core] < target) @(negedge clk);
  endtask

  localparam logic [47:0] PA_VM1 = 48'h1000_0000, PA_VM1_RO = 48'h1800_0000, PA_VM2 = 48'h2000_0000;
  int vm1_cores [4] = '{0, 1, 4, 5};
  int vm2_cores [3] = '{2, 3, 7};

  initial begin
    int bad, ov7, dor6;
    rt_root_t r;
    for (int v = 0; v < NV; v++) begin vf_inst[v] = '0; c_vffault[v] = 0; end
    for (int i = 0; i < N; i++) begin
      c_dma[i] = 0; c_dfault[i] = 0; c_snd[i] = 0; c_sfault[i] = 0; c_rcv[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- hypervisor: controller routing tables ----
    r = '{valid: 1'b1, rtype: RT_MESH, count: 8'd1, base: 8'd0};
    wr(1, CFG_RT_ROOT, 0, 1, META_W'(r));
    wr(1, CFG_RT_SRAM, 0, 0, META_W'({8'd0, 8'd0, 8'd2, 8'd2}));
    r = '{valid: 1'b1, rtype: RT_STANDARD, count: 8'd3, base: 8'd4};
    wr(1, CFG_RT_ROOT, 0, 2, META_W'(r));
    foreach (vm2_cores[k]) wr(1, CFG_RT_SRAM, 0, 4 + k, META_W'({8'(k), 8'(vm2_cores[k]), 16'd0}));
    // ---- per-core h-REG, NoC routing tables, RTT ----
    foreach (vm1_cores[i]) begin
      hreg(vm1_cores[i], 1, 1, 0);
      foreach (vm1_cores[k]) wr(1, CFG_CORE_RT, vm1_cores[i], k, rte(vm1_cores[k], DIR_NULL));
      wr(1, CFG_RTT, vm1_cores[i], 0, rtt(48'h0, PA_VM1, 32'h10000, 4'b0011));
      wr(1, CFG_RTT, vm1_cores[i], 1, rtt(48'h100000, PA_VM1_RO, 32'h4000, 4'b0001));
    end
    foreach (vm2_cores[i]) begin
      hreg(vm2_cores[i], 2, 0, vm2_cores[i] == 2 ? 8 : 0);
      foreach (vm2_cores[k])
        wr(1, CFG_CORE_RT, vm2_cores[i], 16 + k,
           rte(vm2_cores[k], (vm2_cores[i] == 7 && k == 0) ? DIR_TOP : DIR_NULL));
      wr(1, CFG_RTT, vm2_cores[i], 0, rtt(48'h0, PA_VM2, 32'h10000, 4'b0011));
    end
    // a guest tries to give itself core 6
    wr(0, CFG_CORE_RT, 2, 3, rte(6, DIR_NULL));
    wr(0, CFG_HREG, 6, 0, '1);
    check(n_cfg_rejected == 2, "guest configuration writes rejected");

    // ---- (1) VM 1: v0 loads 32 lines, sends to v1, v1 stores ----
    issue(0, OP_RECV, 1, 500, 32, '0, 0);
    issue(0, OP_DMA_LOAD, 0, 0, 32, 48'h0, 0);
    wait_cnt(c_dma, 0, 1);                               // the send reads what the load wrote
    issue(0, OP_SEND, 0, 0, 32, '0, 1);
    wait_cnt(c_rcv, 1, 1);
    issue(0, OP_DMA_STORE, 1, 500, 32, 48'h8000, 0);
    wait_cnt(c_dma, 1, 1);
    repeat (20) @(negedge clk);
    bad = 0;
    for (int i = 0; i < 32; i++)
      if (g_hbm[1].u.peek(PA_VM1 + 48'h8000 + 48'(16 * i)) != g_hbm[0].u.peek(PA_VM1 + 48'(16 * i))) begin
        if (bad == 0) $display("line %0d: %h vs %h sram0 %h sram1 %h", i, g_hbm[1].u.peek(PA_VM1 + 48'h8000 + 48'(16 * i)),
          g_hbm[0].u.peek(PA_VM1 + 48'(16 * i)), dut.g_tile[0].u_tile.u_sram.mem[i], dut.g_tile[1].u_tile.u_sram.mem[500+i]);
        bad++;
      end
    check(bad == 0, $sformatf("VM 1 layer transfer: %0d lines wrong", bad));

    // ---- (2) VM 2: v2 (p7) loads and sends to v0 (p2) around core 6 ----
    ov7 = int'(n_override[7]);
    dor6 = int'(n_dor[6]);
    issue(1, OP_RECV, 0, 700, 16, '0, 0);
    issue(1, OP_DMA_LOAD, 2, 0, 16, 48'h40, 0);
    wait_cnt(c_dma, 7, 1);
    issue(1, OP_SEND, 2, 0, 16, '0, 0);
    wait_cnt(c_rcv, 2, 1);
    check(int'(n_override[7]) == ov7 + 16, "VM 2 packet leaves core 7 by its predefined direction");
    check(int'(n_dor[6]) == dor6, "no VM 2 flit crosses core 6");
    check(n_recv[2] == 16, "core 2 received the packet");
    // ---- (3) same virtual address, VM 2's memory; stores ----
    issue(1, OP_DMA_STORE, 0, 700, 16, 48'hC000, 0);
    issue(1, OP_DMA_LOAD, 0, 900, 8, 48'h0, 0);
    wait_cnt(c_dma, 2, 2);
    repeat (20) @(negedge clk);
    bad = 0;
    for (int i = 0; i < 16; i++)
      if (g_hbm[2].u.peek(PA_VM2 + 48'hC000 + 48'(16 * i)) != g_hbm[7].u.peek(PA_VM2 + 48'h40 + 48'(16 * i))) bad++;
    check(bad == 0, $sformatf("VM 2 transfer: %0d lines wrong", bad));
    bad = 0;
    for (int i = 0; i < 8; i++)
      if (dut.g_tile[2].u_tile.u_sram.mem[900 + i] != g_hbm[2].u.peek(PA_VM2 + 48'(16 * i))) bad++;
    check(bad == 0, "VM 2 virtual address 0 reads VM 2's physical memory");
    check(g_hbm[2].u.n_reads == 8 && g_hbm[7].u.n_reads == 16, "each core loads through its own HBM channel");
    check(n_throttled[2] > 0, "core 2 throttled by its limit");

    // ---- isolation and protection ----
    issue(1, OP_DMA_LOAD, 5, 0, 1, 48'h0, 0);            // no virtual core 5 in VM 2
    issue(0, OP_DMA_STORE, 0, 0, 4, 48'h100000, 0);      // store into VM 1's read-only range
    wait_cnt(c_dma, 0, 2);
    check(c_dfault[0] == 1, "store into read-only range faults");
    wr(1, CFG_CORE_RT, 0, 4, rte(6, DIR_NULL));          // stale entry past VM 1's table
    issue(0, OP_SEND, 0, 0, 4, '0, 4);                   // v4 is outside VM 1 (4 entries)
    wait_cnt(c_snd, 0, 2);
    check(c_sfault[0] == 1, "send outside VM 1 refused");
    check(c_vffault[1] == 1 && c_vffault[0] == 0, "foreign-core instruction dropped, VF 1 told");

    // ---- last_v after a flush: ranges 0 then 1 ----
    issue(0, OP_DMA_LOAD, 0, 2000, 2, 48'h100000, 0);
    wait_cnt(c_dma, 0, 3);
    hreg(0, 1, 1, 0);                                     // h-REG rewrite flushes the TLB
    issue(0, OP_DMA_LOAD, 0, 2000, 2, 48'h0, 0);
    issue(0, OP_DMA_LOAD, 0, 2010, 2, 48'h100000, 0);
    issue(0, OP_DMA_LOAD, 0, 2020, 2, 48'h100000, 0);
    wait_cnt(c_dma, 0, 6);
    bad = 0;
    for (int i = 0; i < 2; i++)
      if (dut.g_tile[0].u_tile.u_sram.mem[2010 + i] != g_hbm[0].u.peek(PA_VM1_RO + 48'(16 * i))) bad++;
    check(bad == 0, "read-only range loads");
    repeat (10) @(negedge clk);

    // ---- mechanism census ----
    begin
      int s_stall = 0, s_ov = 0, s_dor = 0, s_miss = 0, s_lv = 0, s_th = 0, s_tx = 0, s_rx = 0;
      for (int i = 0; i < N; i++) begin
        s_stall += int'(n_stall[i]); s_ov += int'(n_override[i]); s_dor += int'(n_dor[i]);
        s_miss += int'(n_tlb_miss[i]); s_lv += int'(n_lastv_used[i]); s_th += int'(n_throttled[i]);
        s_tx += int'(n_sent[i]); s_rx += int'(n_recv[i]);
      end
      $display("mechanisms: cfg_rejected=%0d lookups=%0d reuse=%0d inst_fault=%0d dor=%0d override=%0d",
               n_cfg_rejected, n_lookups, n_reuse, n_inst_fault, s_dor, s_ov);
      $display("            tlb_miss=%0d lastv=%0d perm_fault=%0d send_refused=%0d throttled=%0d stall=%0d sent=%0d recv=%0d",
               s_miss, s_lv, c_dfault[0], c_sfault[0], s_th, s_stall, s_tx, s_rx);
      check(n_cfg_rejected > 0, "mechanism: non-hyper write rejected");
      check(n_lookups > 0, "mechanism: routing-table lookup");
      check(n_reuse > 0, "mechanism: translation reuse");
      check(n_inst_fault > 0, "mechanism: instruction isolation fault");
      check(s_dor > 0, "mechanism: dimension-order hop");
      check(s_ov > 0, "mechanism: predefined direction");
      check(s_miss > 0, "mechanism: range-TLB miss");
      check(s_lv > 0, "mechanism: last_v hit");
      check(c_dfault[0] > 0, "mechanism: permission fault");
      check(c_sfault[0] > 0, "mechanism: send refusal");
      check(s_th > 0, "mechanism: throttling");
      check(s_stall > 0, "mechanism: queue stall");
      check(s_tx == 48 && s_rx == 48, $sformatf("flits sent %0d received %0d", s_tx, s_rx));
      check(n_dispatched == 15, $sformatf("dispatched %0d", n_dispatched));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
