// npu_controller: NPU controller with hyper mode and the instruction vRouter.
//
// Guests (one virtual function, VF, per virtual NPU) push NPU instructions
// that name virtual cores. The hardware tags each instruction with the VMID
// of the VF it came through (VMID = VF index + 1; VMID 0 marks a core that
// belongs to no virtual NPU), so a guest cannot claim another VM's identity.
// A round-robin arbiter feeds one instruction at a time to the instruction
// vRouter, which rewrites the core ID to a physical core and drops (and
// reports to the VF) instructions for cores outside the VM. Translated
// instructions are dispatched over an instruction bus to the physical core,
// which takes them when its ready bit is high.
//
// Hyper mode: configuration writes carry a hyper flag that is set only for
// accesses through the physical function (PF), which only the hypervisor
// maps. Only such writes may change the controller's routing-table root and
// SRAM, and, through a one-cycle registered configuration bus, each core's
// hyper registers, NoC routing table and range translation table. A write
// without the flag is rejected and counted.
//
// Timing: configuration writes take effect the next cycle (controller
// tables) or two cycles later (core tables). Instruction latency is that of
// the vRouter (1 cycle for a reused translation, 3 for a table lookup).
//
// Follows the paper: hyper mode, PF/VF split, tables written only by the
// hyper-mode controller, the instruction vRouter. Own choices: VMID = VF
// index + 1, the configuration address map (see vnpu_pkg), round-robin VF
// arbitration, and the instruction-bus form of dispatch.
module npu_controller
  import vnpu_pkg::*;
#(
  parameter int unsigned NUM_CORES  = 8,
  parameter int unsigned NUM_VF     = 8,
  parameter int unsigned RT_ENTRIES = 128,
  parameter int unsigned MESH_X     = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration writes (MMIO)
  input  logic                     cfg_valid,
  input  logic                     cfg_hyper,
  input  cfg_addr_t                cfg_addr,
  input  logic [META_W-1:0]        cfg_wdata,
  output logic                     cfg_reject,
  // guest instruction queues, one per VF
  input  logic [NUM_VF-1:0]        vf_valid,
  output logic [NUM_VF-1:0]        vf_ready,
  input  npu_inst_t                vf_inst [NUM_VF],
  output logic [NUM_VF-1:0]        vf_fault,
  output logic [CORE_W-1:0]        fault_vcore,
  // core configuration bus
  output logic                     tcfg_we,
  output logic [CORE_W-1:0]        tcfg_core,
  output tile_cfg_sel_e            tcfg_sel,
  output logic [7:0]               tcfg_idx,
  output logic [META_W-1:0]        tcfg_wdata,
  // instruction bus to the cores
  output logic                     ibus_valid,
  output logic [CORE_W-1:0]        ibus_core,
  output logic [VMID_W-1:0]        ibus_vmid,
  output npu_inst_t                ibus_inst,
  input  logic [NUM_CORES-1:0]     ibus_ready,
  // statistics
  output logic [31:0]              n_rejected,
  output logic [31:0]              n_dispatched,
  output logic [31:0]              n_lookups,
  output logic [31:0]              n_reuse,
  output logic [31:0]              n_inst_fault
);
  localparam int unsigned VW = (NUM_VF > 1) ? $clog2(NUM_VF) : 1;

  // ---------------- configuration decode ----------------
  wire acc      = cfg_valid && cfg_hyper;
  wire root_we  = acc && cfg_addr.region == CFG_RT_ROOT;
  wire sram_we  = acc && cfg_addr.region == CFG_RT_SRAM;
  logic tile_region;
  tile_cfg_sel_e tsel;
  always_comb begin
    tile_region = 1'b1;
    tsel        = TCFG_HREG;
    unique case (cfg_addr.region)
      CFG_HREG:    tsel = TCFG_HREG;
      CFG_CORE_RT: tsel = TCFG_RT;
      CFG_RTT:     tsel = TCFG_RTT;
      default:     tile_region = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tcfg_we    <= 1'b0;
      tcfg_core  <= '0;
      tcfg_sel   <= TCFG_HREG;
      tcfg_idx   <= '0;
      tcfg_wdata <= '0;
      cfg_reject <= 1'b0;
      n_rejected <= '0;
    end else begin
      tcfg_we    <= acc && tile_region;
      cfg_reject <= cfg_valid && !cfg_hyper;
      if (cfg_valid && !cfg_hyper) n_rejected <= n_rejected + 1;
      if (acc && tile_region) begin
        tcfg_core  <= cfg_addr.core;
        tcfg_sel   <= tsel;
        tcfg_idx   <= cfg_addr.index;
        tcfg_wdata <= cfg_wdata;
      end
    end
  end

  // ---------------- VF arbitration ----------------
  logic [VW-1:0] rr, gsel;
  logic          gvalid;
  logic          vr_in_ready;
  always_comb begin
    gvalid = 1'b0;
    gsel   = '0;
    for (int k = 0; k < NUM_VF; k++) begin
      logic [VW-1:0] i;
      i = VW'((int'(rr) + k) % NUM_VF);
      if (!gvalid && vf_valid[i]) begin
        gvalid = 1'b1;
        gsel   = i;
      end
    end
    vf_ready = '0;
    if (gvalid && vr_in_ready) vf_ready[gsel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (gvalid && vr_in_ready)
      rr <= (gsel == VW'(NUM_VF - 1)) ? '0 : gsel + 1'b1;
  end

  // ---------------- instruction vRouter ----------------
  logic              vr_out_valid, vr_out_ready, vr_fault;
  logic [VMID_W-1:0] vr_fault_vmid;

  inst_vrouter #(.RT_ENTRIES(RT_ENTRIES), .NUM_VM(1 << VMID_W), .MESH_X(MESH_X)) u_vr (
    .clk, .rst_n,
    .root_we    (root_we),
    .root_idx   (VMID_W'(cfg_addr.index)),
    .root_wdata (rt_root_t'(cfg_wdata[$bits(rt_root_t)-1:0])),
    .sram_we    (sram_we),
    .sram_idx   ($clog2(RT_ENTRIES)'(cfg_addr.index)),
    .sram_wdata (rt_sram_entry_t'(cfg_wdata[$bits(rt_sram_entry_t)-1:0])),
    .in_valid   (gvalid),
    .in_ready   (vr_in_ready),
    .in_vmid    (VMID_W'(gsel) + VMID_W'(1)),
    .in_inst    (vf_inst[gsel]),
    .out_valid  (vr_out_valid),
    .out_ready  (vr_out_ready),
    .out_vmid   (ibus_vmid),
    .out_inst   (ibus_inst),
    .fault      (vr_fault),
    .fault_vmid (vr_fault_vmid),
    .fault_vcore(fault_vcore),
    .n_lookups  (n_lookups),
    .n_reuse    (n_reuse));

  assign ibus_valid   = vr_out_valid;
  assign ibus_core    = ibus_inst.core;
  always_comb begin
    vr_out_ready = 1'b0;
    for (int c = 0; c < NUM_CORES; c++)
      if (ibus_inst.core == CORE_W'(c)) vr_out_ready = ibus_ready[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vf_fault     <= '0;
      n_dispatched <= '0;
      n_inst_fault <= '0;
    end else begin
      vf_fault <= '0;
      if (vr_fault) begin
        n_inst_fault <= n_inst_fault + 1;
        for (int v = 0; v < NUM_VF; v++)
          if (vr_fault_vmid == VMID_W'(v + 1)) vf_fault[v] <= 1'b1;
      end
      if (ibus_valid && vr_out_ready) n_dispatched <= n_dispatched + 1;
    end
  end

  // The vRouter only produces physical cores that the hypervisor mapped.
  a_core_exists: assert property (@(posedge clk) disable iff (!rst_n)
    ibus_valid |-> int'(ibus_core) < NUM_CORES);
endmodule
