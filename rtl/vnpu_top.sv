// vnpu_top: an inter-core connected NPU with topology-aware virtualization.
//
// MESH_X x MESH_Y NPU cores (8 as a 4x2 mesh by default, like the FPGA
// prototype's eight tiles) are joined by a 2D-mesh NoC; each core has its
// own HBM channel, brought out as ports (HBM is outside the design). One
// NPU controller serves all cores:
//   * configuration writes (MMIO) with a hyper flag: only the physical
//     function (the hypervisor's) may write the controller's routing table
//     and, over the configuration bus, each core's h-REG, NoC routing table
//     and range translation table;
//   * one instruction queue per virtual function (one per virtual NPU); the
//     instruction vRouter maps each instruction's virtual core to a physical
//     core and the instruction bus delivers it there.
// Inside the cores, vChunk translates DMA addresses through variable-size
// ranges, the access counter limits each core's HBM traffic, and the NoC
// vRouter rewrites send destinations and keeps packets of a virtual NPU on
// predefined paths.
//
// Interface: plain signals and arrays; per-core HBM channels and per-core
// completion pulses and event counters for observation. Timing follows the
// blocks: 1-3 cycles through the controller, a FIFO slot in the core, one
// hop per cycle in the mesh, one flit or DMA request per cycle.
// Own choices: the mesh shape for eight cores, the number of VFs, and
// which counters are brought out.
module vnpu_top
  import vnpu_pkg::*;
#(
  parameter int unsigned MESH_X      = 4,
  parameter int unsigned MESH_Y      = 2,
  parameter int unsigned NUM_VF      = 8,
  parameter int unsigned SPAD_LINES  = 32768,
  parameter int unsigned RT_ENTRIES  = 128,
  parameter int unsigned RTT_ENTRIES = 256,
  parameter int unsigned TLB_ENTRIES = 4,
  parameter int unsigned WINDOW      = 1024,
  localparam int unsigned N          = MESH_X * MESH_Y
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration (MMIO)
  input  logic                 cfg_valid,
  input  logic                 cfg_hyper,
  input  cfg_addr_t            cfg_addr,
  input  logic [META_W-1:0]    cfg_wdata,
  output logic                 cfg_reject,
  // guest instruction queues
  input  logic [NUM_VF-1:0]    vf_valid,
  output logic [NUM_VF-1:0]    vf_ready,
  input  npu_inst_t            vf_inst [NUM_VF],
  output logic [NUM_VF-1:0]    vf_fault,
  // HBM channels, one per core
  output logic [N-1:0]         hbm_req_valid,
  input  logic [N-1:0]         hbm_req_ready,
  output logic [N-1:0]         hbm_req_we,
  output logic [PA_W-1:0]      hbm_req_addr  [N],
  output logic [LINE_W-1:0]    hbm_req_wdata [N],
  output logic [SPAD_AW-1:0]   hbm_req_tag   [N],
  input  logic [N-1:0]         hbm_rsp_valid,
  output logic [N-1:0]         hbm_rsp_ready,
  input  logic [SPAD_AW-1:0]   hbm_rsp_tag   [N],
  input  logic [LINE_W-1:0]    hbm_rsp_data  [N],
  // per-core completion pulses
  output logic [N-1:0]         dma_done,
  output logic [N-1:0]         dma_fault,
  output logic [N-1:0]         snd_done,
  output logic [N-1:0]         snd_fault,
  output logic [N-1:0]         rcv_done,
  // event counters
  output logic [31:0]          n_cfg_rejected,
  output logic [31:0]          n_lookups,
  output logic [31:0]          n_reuse,
  output logic [31:0]          n_inst_fault,
  output logic [31:0]          n_dispatched,
  output logic [31:0]          n_stall      [N],
  output logic [31:0]          n_override   [N],
  output logic [31:0]          n_dor        [N],
  output logic [31:0]          n_tlb_miss   [N],
  output logic [31:0]          n_lastv_used [N],
  output logic [31:0]          n_throttled  [N],
  output logic [31:0]          n_sent       [N],
  output logic [31:0]          n_recv       [N]
);
  logic                tcfg_we;
  logic [CORE_W-1:0]   tcfg_core;
  tile_cfg_sel_e       tcfg_sel;
  logic [7:0]          tcfg_idx;
  logic [META_W-1:0]   tcfg_wdata;
  logic                ibus_valid;
  logic [CORE_W-1:0]   ibus_core;
  npu_inst_t           ibus_inst;
  logic [N-1:0]        ibus_ready;
  logic [CORE_W-1:0]   fault_vcore;

  npu_controller #(.NUM_CORES(N), .NUM_VF(NUM_VF), .RT_ENTRIES(RT_ENTRIES), .MESH_X(MESH_X)) u_ctrl (
    .clk, .rst_n,
    .cfg_valid, .cfg_hyper, .cfg_addr, .cfg_wdata, .cfg_reject,
    .vf_valid, .vf_ready, .vf_inst, .vf_fault, .fault_vcore,
    .tcfg_we, .tcfg_core, .tcfg_sel, .tcfg_idx, .tcfg_wdata,
    .ibus_valid, .ibus_core, .ibus_vmid (), .ibus_inst, .ibus_ready,
    .n_rejected (n_cfg_rejected), .n_dispatched, .n_lookups, .n_reuse, .n_inst_fault);

  // mesh links: index 0 left, 1 right, 2 top, 3 bottom
  logic [3:0] l_in_valid [N], l_in_ready [N], l_out_valid [N], l_out_ready [N];
  flit_t      l_in_flit  [N][4], l_out_flit [N][4];

  for (genvar n = 0; n < N; n++) begin : g_tile
    localparam int X = n % MESH_X, Y = n / MESH_X;
    hreg_t       hreg;
    logic [31:0] n_rtt_reads, n_refused;
    logic [15:0] mem_beats_last;

    npu_tile #(
      .MESH_X(MESH_X), .MESH_Y(MESH_Y), .SPAD_LINES(SPAD_LINES), .RT_ENTRIES(RT_ENTRIES),
      .RTT_ENTRIES(RTT_ENTRIES), .TLB_ENTRIES(TLB_ENTRIES), .WINDOW(WINDOW)
    ) u_tile (
      .clk, .rst_n, .my_id (CORE_W'(n)),
      .tcfg_we, .tcfg_core, .tcfg_sel, .tcfg_idx, .tcfg_wdata,
      .ibus_valid, .ibus_core, .ibus_inst, .ibus_ready (ibus_ready[n]),
      .link_in_valid (l_in_valid[n]), .link_in_ready (l_in_ready[n]), .link_in_flit (l_in_flit[n]),
      .link_out_valid (l_out_valid[n]), .link_out_ready (l_out_ready[n]), .link_out_flit (l_out_flit[n]),
      .hbm_req_valid (hbm_req_valid[n]), .hbm_req_ready (hbm_req_ready[n]), .hbm_req_we (hbm_req_we[n]),
      .hbm_req_addr (hbm_req_addr[n]), .hbm_req_wdata (hbm_req_wdata[n]), .hbm_req_tag (hbm_req_tag[n]),
      .hbm_rsp_valid (hbm_rsp_valid[n]), .hbm_rsp_ready (hbm_rsp_ready[n]),
      .hbm_rsp_tag (hbm_rsp_tag[n]), .hbm_rsp_data (hbm_rsp_data[n]),
      .hreg,
      .dma_done (dma_done[n]), .dma_fault (dma_fault[n]), .snd_done (snd_done[n]),
      .snd_fault (snd_fault[n]), .rcv_done (rcv_done[n]),
      .n_stall (n_stall[n]), .n_override (n_override[n]), .n_dor (n_dor[n]),
      .n_tlb_miss (n_tlb_miss[n]), .n_rtt_reads, .n_lastv_used (n_lastv_used[n]),
      .n_throttled (n_throttled[n]), .mem_beats_last, .n_sent (n_sent[n]), .n_recv (n_recv[n]),
      .n_refused);

    if (X > 0) begin : g_l
      assign l_in_valid[n][0] = l_out_valid[n-1][1];
      assign l_in_flit[n][0]  = l_out_flit[n-1][1];
      assign l_out_ready[n][0] = l_in_ready[n-1][1];
    end else begin : g_nl
      assign l_in_valid[n][0] = 1'b0;
      assign l_in_flit[n][0]  = '0;
      assign l_out_ready[n][0] = 1'b0;
    end
    if (X < MESH_X - 1) begin : g_r
      assign l_in_valid[n][1] = l_out_valid[n+1][0];
      assign l_in_flit[n][1]  = l_out_flit[n+1][0];
      assign l_out_ready[n][1] = l_in_ready[n+1][0];
    end else begin : g_nr
      assign l_in_valid[n][1] = 1'b0;
      assign l_in_flit[n][1]  = '0;
      assign l_out_ready[n][1] = 1'b0;
    end
    if (Y > 0) begin : g_t
      assign l_in_valid[n][2] = l_out_valid[n-MESH_X][3];
      assign l_in_flit[n][2]  = l_out_flit[n-MESH_X][3];
      assign l_out_ready[n][2] = l_in_ready[n-MESH_X][3];
    end else begin : g_nt
      assign l_in_valid[n][2] = 1'b0;
      assign l_in_flit[n][2]  = '0;
      assign l_out_ready[n][2] = 1'b0;
    end
    if (Y < MESH_Y - 1) begin : g_b
      assign l_in_valid[n][3] = l_out_valid[n+MESH_X][2];
      assign l_in_flit[n][3]  = l_out_flit[n+MESH_X][2];
      assign l_out_ready[n][3] = l_in_ready[n+MESH_X][2];
    end else begin : g_nb
      assign l_in_valid[n][3] = 1'b0;
      assign l_in_flit[n][3]  = '0;
      assign l_out_ready[n][3] = 1'b0;
    end
  end
endmodule
