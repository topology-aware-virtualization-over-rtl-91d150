// tb_broadcast: data broadcast inside one virtual NPU, through the NoC
// vRouter against synchronization through global memory, on the full design.
//
// A virtual NPU of five cores (v0..v4 on physical cores 0..4) broadcasts a
// 2048-byte result (128 lines) from v0 to 1, 2, 3 and 4 receivers ("1:n").
//   * vRouter: each receiver posts a RECV, v0 issues one SEND per receiver.
//   * memory synchronization: v0 stores the result with a DMA store; after
//     it is done, every receiver loads it with a DMA load.
// All HBM ports of the top share one global memory with one line per cycle
// of bandwidth (hbm_shared_model). Every received line is compared with the
// source, the cycles from the first instruction to the last completion are
// printed for both methods, and the vRouter broadcast must be the faster.
// How much faster depends on the ratio of NoC to HBM bandwidth of a chip;
// here one link and the memory both move one line per cycle, and the DMA
// store of this design takes four cycles per line, so the bound checked is
// only that the vRouter wins. Measured: 142/794 cycles at 1:1, 276/916 at
// 1:2, 414/1044 at 1:3, 547/1172 at 1:4.
module tb_broadcast;
  import vnpu_pkg::*;
  localparam int N = 8, NV = 8, L = 128;
  localparam logic [47:0] PA_BASE = 48'h40_0000;
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

  hbm_shared_model #(.N(N), .LAT(8)) u_mem (
    .clk, .rst_n, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready), .req_we(hbm_req_we),
    .req_addr(hbm_req_addr), .req_wdata(hbm_req_wdata), .req_tag(hbm_req_tag),
    .rsp_valid(hbm_rsp_valid), .rsp_ready(hbm_rsp_ready), .rsp_tag(hbm_rsp_tag),
    .rsp_data(hbm_rsp_data));

  // one line of every core's weight SRAM, for checking what arrived
  logic [SPAD_AW-1:0] peek_addr = '0;
  logic [LINE_W-1:0]  peek_line [N];
  for (genvar g = 0; g < N; g++) begin : g_peek
    assign peek_line[g] = dut.g_tile[g].u_tile.u_sram.mem[peek_addr];
  end
  task automatic count_bad(input int n, input int base, input int k, inout int bad);
    for (int d = 1; d <= n; d++)
      for (int i = 0; i < L; i++) begin
        peek_addr = SPAD_AW'(base + i);
        #1;
        if (peek_line[d] != pat(k, i)) bad++;
      end
  endtask

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

  int cyc = 0;
  int n_dma [N], n_rcv [N], last_done = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk)
    for (int i = 0; i < N; i++) begin
      if (dma_done[i]) begin n_dma[i]++; last_done = cyc; end
      if (rcv_done[i]) begin n_rcv[i]++; last_done = cyc; end
    end

  task automatic wr(input cfg_region_e r, input int core, input int idx, input logic [META_W-1:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg_hyper = 1;
    cfg_addr = '{region: r, core: CORE_W'(core), index: CORE_W'(idx)};
    cfg_wdata = d;
    @(negedge clk);
    cfg_valid = 0; cfg_hyper = 0;
  endtask
  function automatic logic [META_W-1:0] rte(input int p);
    noc_rt_entry_t r;
    r = '{valid: 1'b1, pcore: CORE_W'(p), dir: DIR_NULL};
    return META_W'(r);
  endfunction
  function automatic logic [META_W-1:0] rtt(input logic [47:0] pa);
    rtt_entry_t e;
    e = '{va: 48'h0, pa: pa, size: 32'h10000, perm: 4'b0011, last_v: LASTV_NULL};
    return META_W'(e);
  endfunction
  task automatic issue(input opcode_e op, input int vcore, input int spad, input logic [47:0] va,
                       input int dst);
    @(negedge clk);
    vf_valid[0] = 1;
    vf_inst[0] = '{op: op, core: CORE_W'(vcore), spad: 16'(spad), len: 16'(L), step: 16'd1,
                   va: va, dst_vcore: CORE_W'(dst)};
    do @(posedge clk); while (!vf_ready[0]);
    #1 vf_valid[0] = 0;
  endtask
  task automatic wait_dma(input int core, input int n);
    while (n_dma[core] < n) @(negedge clk);
  endtask

  function automatic logic [LINE_W-1:0] pat(input int r, input int a);
    return {32'(a) * 32'h9E37_79B9, 32'(r), ~32'(a), 32'(a) ^ 32'h5A5A_5A5A};
  endfunction

  int fan [4] = '{1, 2, 3, 4};
  initial begin
    rt_root_t r;
    hreg_t h;
    for (int v = 0; v < NV; v++) vf_inst[v] = '0;
    for (int i = 0; i < N; i++) begin n_dma[i] = 0; n_rcv[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    r = '{valid: 1'b1, rtype: RT_STANDARD, count: 8'd5, base: 8'd0};
    wr(CFG_RT_ROOT, 0, 1, META_W'(r));
    for (int v = 0; v < 5; v++) wr(CFG_RT_SRAM, 0, v, META_W'({8'(v), 8'(v), 16'd0}));
    for (int c = 0; c < 5; c++) begin
      h = '{vmid: 4'd1, rt_base: 8'd0, rt_count: 8'd5, rtt_base: 8'd0, rtt_end: 8'd0, rate_limit: 16'd0};
      wr(CFG_HREG, c, 0, META_W'(h));
      for (int v = 0; v < 5; v++) wr(CFG_CORE_RT, c, v, rte(v));
      wr(CFG_RTT, c, 0, rtt(PA_BASE));
    end

    foreach (fan[k]) begin
      int t0, t_noc, t_mem, bad, d0;
      int r0 [N], m0 [N];
      r0 = n_rcv;
      m0 = n_dma;
      for (int i = 0; i < L; i++) dut.g_tile[0].u_tile.u_sram.mem[i] = pat(k, i);
      // ---- through the NoC vRouter ----
      @(negedge clk);
      t0 = cyc;
      for (int d = 1; d <= fan[k]; d++) issue(OP_RECV, d, 1000, '0, 0);
      for (int d = 1; d <= fan[k]; d++) issue(OP_SEND, 0, 0, '0, d);
      for (int d = 1; d <= fan[k]; d++) while (n_rcv[d] < r0[d] + 1) @(negedge clk);
      t_noc = last_done - t0;
      bad = 0;
      count_bad(fan[k], 1000, k, bad);
      check(bad == 0, $sformatf("1:%0d vRouter: %0d lines wrong", fan[k], bad));
      // ---- through global memory ----
      @(negedge clk);
      t0 = cyc;
      d0 = n_dma[0];
      issue(OP_DMA_STORE, 0, 0, 48'(k * L * 16), 0);
      wait_dma(0, d0 + 1);
      for (int d = 1; d <= fan[k]; d++) issue(OP_DMA_LOAD, d, 3000, 48'(k * L * 16), 0);
      for (int d = 1; d <= fan[k]; d++) wait_dma(d, m0[d] + 1);
      t_mem = last_done - t0;
      bad = 0;
      count_bad(fan[k], 3000, k, bad);
      check(bad == 0, $sformatf("1:%0d memory sync: %0d lines wrong", fan[k], bad));
      $display("broadcast 1:%0d of %0d B: vRouter %0d cycles, global memory %0d cycles (%0d.%02dx)",
               fan[k], L * 16, t_noc, t_mem, t_mem / t_noc, (t_mem * 100 / t_noc) % 100);
      check(t_noc < t_mem, $sformatf("1:%0d vRouter %0d not faster than memory %0d", fan[k], t_noc, t_mem));
      check(t_noc >= fan[k] * L, $sformatf("1:%0d vRouter %0d below one line per cycle", fan[k], t_noc));
    end
    check(u_mem.n_writes == 4 * L && u_mem.n_reads == 10 * L, "global memory traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
