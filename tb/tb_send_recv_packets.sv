// tb_send_recv_packets: the send/receive micro-benchmark on the full design.
//
// A virtual NPU of two cores (v0 on physical core 0, v1 on physical core 3,
// three hops apart on the top row of the 4x2 mesh) moves 2, 10, 20 and 30
// routing packets of 2048 bytes (128 flits of 16 bytes) from v0 to v1, one
// SEND and one RECV instruction per packet, all issued by the guest through
// the controller. Every received line is compared with the sent one, and the
// cycles from the first SEND's issue to the last RECV's completion are
// measured. With one flit per cycle the expected time is 128 cycles per
// packet plus a fixed start-up; the check allows 8 cycles per packet of
// instruction overhead on top of that and a 60-cycle start-up.
module tb_send_recv_packets;
  import vnpu_pkg::*;
  localparam int N = 8, NV = 8, PKT = 128;
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

  // HBM is not used here: channels idle
  assign hbm_req_ready = '1;
  assign hbm_rsp_valid = '0;
  for (genvar i = 0; i < N; i++) begin : g_idle
    assign hbm_rsp_tag[i]  = '0;
    assign hbm_rsp_data[i] = '0;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, rcv_n = 0, rcv_last = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rcv_done[3]) begin rcv_n++; rcv_last = cyc; end

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
  task automatic issue(input opcode_e op, input int vcore, input int spad, input int dst);
    @(negedge clk);
    vf_valid[0] = 1;
    vf_inst[0] = '{op: op, core: CORE_W'(vcore), spad: 16'(spad), len: 16'(PKT), step: 16'd1,
                   va: '0, dst_vcore: CORE_W'(dst)};
    do @(posedge clk); while (!vf_ready[0]);
    #1 vf_valid[0] = 0;
  endtask

  function automatic logic [LINE_W-1:0] pat(input int a);
    return {32'(a) * 32'h9E37_79B9, 32'(a), ~32'(a), 32'(a) ^ 32'h5A5A_5A5A};
  endfunction

  int npk [4] = '{2, 10, 20, 30};
  initial begin
    rt_root_t r;
    hreg_t h;
    for (int v = 0; v < NV; v++) vf_inst[v] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    r = '{valid: 1'b1, rtype: RT_STANDARD, count: 8'd2, base: 8'd0};
    wr(CFG_RT_ROOT, 0, 1, META_W'(r));
    wr(CFG_RT_SRAM, 0, 0, META_W'({8'd0, 8'd0, 16'd0}));
    wr(CFG_RT_SRAM, 0, 1, META_W'({8'd1, 8'd3, 16'd0}));
    for (int c = 0; c < 4; c += 3) begin
      h = '{vmid: 4'd1, rt_base: 8'd0, rt_count: 8'd2, rtt_base: 8'd0, rtt_end: 8'd0, rate_limit: 16'd0};
      wr(CFG_HREG, c, 0, META_W'(h));
      wr(CFG_CORE_RT, c, 0, rte(0));
      wr(CFG_CORE_RT, c, 1, rte(3));
    end
    // source data in core 0's weight SRAM
    for (int i = 0; i < 30 * PKT; i++) dut.g_tile[0].u_tile.u_sram.mem[i] = pat(i);

    foreach (npk[k]) begin
      int t0, r0, bad, cycles;
      r0 = rcv_n;
      @(negedge clk);
      t0 = cyc;
      for (int p = 0; p < npk[k]; p++) begin
        issue(OP_RECV, 1, 4000 + p * PKT, 0);
        issue(OP_SEND, 0, p * PKT, 1);
      end
      while (rcv_n < r0 + npk[k]) @(negedge clk);
      cycles = rcv_last - t0;
      bad = 0;
      for (int i = 0; i < npk[k] * PKT; i++)
        if (dut.g_tile[3].u_tile.u_sram.mem[4000 + i] != pat(i)) bad++;
      $display("packets %0d: %0d cycles send+receive (%0d flits)", npk[k], cycles, npk[k] * PKT);
      check(bad == 0, $sformatf("%0d packets: %0d lines wrong", npk[k], bad));
      check(cycles >= npk[k] * PKT && cycles <= npk[k] * (PKT + 8) + 60,
            $sformatf("%0d packets took %0d cycles", npk[k], cycles));
      for (int i = 0; i < npk[k] * PKT; i++) dut.g_tile[3].u_tile.u_sram.mem[4000 + i] = '0;
    end
    check(n_dor[1] > 0 && n_dor[2] > 0, "packets crossed cores 1 and 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
