// tb_npu_controller: self-checking test of the NPU controller.
//
// The hypervisor (hyper-flagged writes) sets up two virtual NPUs: VM 1 (VF 0)
// with a standard routing table {v0->p3, v1->p5, v2->p6} and VM 2 (VF 1)
// with a 2x2 mesh table starting at p0 (v0..v3 -> p0, p1, p4, p5 on a
// 4-wide mesh). Checked: a guest write without the hyper flag is rejected
// and changes nothing; core-table writes appear on the core configuration
// bus one cycle later with the right fields, and not for rejected writes;
// random instruction streams from both VFs reach the right physical cores
// tagged with the right VMID, in order per VF, under random core
// back-pressure; an instruction for a core outside the VM is dropped and
// reported to its VF only; consecutive instructions to one core reuse the
// kept translation.
module tb_npu_controller;
  import vnpu_pkg::*;
  localparam int NC = 8, NV = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_valid = 0, cfg_hyper = 0, cfg_reject;
  cfg_addr_t cfg_addr = '0;
  logic [META_W-1:0] cfg_wdata = '0;
  logic [NV-1:0] vf_valid = '0, vf_ready, vf_fault;
  npu_inst_t vf_inst [NV];
  logic [CORE_W-1:0] fault_vcore;
  logic tcfg_we;
  logic [CORE_W-1:0] tcfg_core;
  tile_cfg_sel_e tcfg_sel;
  logic [7:0] tcfg_idx;
  logic [META_W-1:0] tcfg_wdata;
  logic ibus_valid;
  logic [CORE_W-1:0] ibus_core;
  logic [VMID_W-1:0] ibus_vmid;
  npu_inst_t ibus_inst;
  logic [NC-1:0] ibus_ready = '1;
  logic [31:0] n_rejected, n_dispatched, n_lookups, n_reuse, n_inst_fault;

  npu_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
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

  // tile configuration bus monitor
  int tcfg_n = 0;
  logic [CORE_W-1:0] tcfg_last_core;
  tile_cfg_sel_e tcfg_last_sel;
  logic [7:0] tcfg_last_idx;
  logic [META_W-1:0] tcfg_last_data;
  always @(negedge clk) if (tcfg_we) begin
    tcfg_n++;
    tcfg_last_core = tcfg_core; tcfg_last_sel = tcfg_sel;
    tcfg_last_idx = tcfg_idx; tcfg_last_data = tcfg_wdata;
  end

  // reference translation
  function automatic int p_of(input int vf, input int v);
    int std [3] = '{3, 5, 6};
    int msh [4] = '{0, 1, 4, 5};
    if (vf == 0) return (v < 3) ? std[v] : -1;
    if (vf == 1) return (v < 4) ? msh[v] : -1;
    return -1;
  endfunction

  // expected dispatch queues per VF
  npu_inst_t exp_q [NV][$];
  int disp_bad = 0, disp_n = 0, faults_seen [NV];
  always @(negedge clk) begin
    if (rst_n && ibus_valid && ibus_ready[3'(ibus_core)]) begin
      int vf;
      npu_inst_t e;
      vf = int'(ibus_vmid) - 1;
      if (vf < 0 || vf >= NV || exp_q[vf].size() == 0) disp_bad++;
      else begin
        e = exp_q[vf].pop_front();
        if (ibus_inst != e || ibus_core != e.core) disp_bad++;
      end
      disp_n++;
    end
    for (int v = 0; v < NV; v++) if (vf_fault[v]) faults_seen[v]++;
  end

  task automatic issue(input int vf, input int v, input int tag);
    npu_inst_t i;
    int p;
    i = '0;
    i.op = OP_DMA_LOAD;
    i.core = CORE_W'(v);
    i.spad = 16'(tag);
    i.va = 48'(tag * 16);
    p = p_of(vf, v);
    @(negedge clk);
    vf_valid[vf] = 1;
    vf_inst[vf] = i;
    do @(posedge clk); while (!vf_ready[vf]);
    if (p >= 0) begin
      i.core = CORE_W'(p);
      exp_q[vf].push_back(i);
    end
    #1 vf_valid[vf] = 0;
  endtask

  initial begin
    rt_root_t r;
    for (int v = 0; v < NV; v++) begin vf_inst[v] = '0; faults_seen[v] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // VM 1: standard table at SRAM 10..12
    r = '{valid: 1'b1, rtype: RT_STANDARD, count: 8'd3, base: 8'd10};
    wr(1, CFG_RT_ROOT, 0, 1, META_W'(r));
    wr(1, CFG_RT_SRAM, 0, 10, META_W'({8'd0, 8'd3, 16'd0}));
    wr(1, CFG_RT_SRAM, 0, 11, META_W'({8'd1, 8'd5, 16'd0}));
    wr(1, CFG_RT_SRAM, 0, 12, META_W'({8'd2, 8'd6, 16'd0}));
    // VM 2: 2x2 mesh from p0, entry at SRAM 20
    r = '{valid: 1'b1, rtype: RT_MESH, count: 8'd1, base: 8'd20};
    wr(1, CFG_RT_ROOT, 0, 2, META_W'(r));
    wr(1, CFG_RT_SRAM, 0, 20, META_W'({8'd0, 8'd0, 8'd2, 8'd2}));
    // guest tries to remap VM 1 onto VM 2's cores
    r = '{valid: 1'b1, rtype: RT_MESH, count: 8'd1, base: 8'd20};
    wr(0, CFG_RT_ROOT, 0, 1, META_W'(r));
    check(n_rejected == 1, "non-hyper write rejected");
    // core table writes
    wr(1, CFG_CORE_RT, 6, 2, META_W'(12'h9AB));
    @(negedge clk);
    check(tcfg_n == 1 && tcfg_last_core == 6 && tcfg_last_sel == TCFG_RT &&
          tcfg_last_idx == 2 && tcfg_last_data == META_W'(12'h9AB), "core RT write on the bus");
    wr(1, CFG_RTT, 5, 7, {16'h1234, 128'h5});
    @(negedge clk);
    check(tcfg_n == 2 && tcfg_last_sel == TCFG_RTT && tcfg_last_core == 5 &&
          tcfg_last_data == {16'h1234, 128'h5}, "core RTT write on the bus");
    wr(0, CFG_HREG, 5, 0, '1);
    @(negedge clk);
    check(tcfg_n == 2, "rejected core write not forwarded");
    check(n_rejected == 2, "two rejections");

    // random streams from both VFs, random core back-pressure
    fork
      for (int k = 0; k < 150; k++) issue(0, (k % 7 < 4) ? 1 : int'($urandom % 3), k);
      for (int k = 0; k < 150; k++) issue(1, int'($urandom % 4), 1000 + k);
      for (int t = 0; t < 1500; t++) begin
        @(negedge clk);
        ibus_ready = 8'($urandom) | 8'($urandom);
      end
    join
    ibus_ready = '1;
    // one VF alone, a run of instructions to one core
    for (int k = 0; k < 20; k++) issue(0, 1, 500 + k);
    // out-of-VM instruction from VF 0
    issue(0, 3, 77);
    repeat (10) @(negedge clk);
    check(exp_q[0].size() == 0 && exp_q[1].size() == 0, "all instructions dispatched");
    check(disp_bad == 0, $sformatf("%0d wrong dispatches", disp_bad));
    check(disp_n == 320, $sformatf("dispatched %0d", disp_n));
    check(faults_seen[0] == 1 && faults_seen[1] == 0, "fault reported to VF 0 only");
    check(fault_vcore == 3, "faulting virtual core");
    check(n_inst_fault == 1, "fault counted");
    check(n_reuse >= 19, $sformatf("translation reused %0d times", n_reuse));
    check(n_lookups + n_reuse == 321, "every instruction translated once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
