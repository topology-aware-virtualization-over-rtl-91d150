// npu_tile: one NPU core with its virtualization hardware.
//
// The tile holds what the paper adds to each core, around the parts it does
// not change (the compute units are outside this design):
//   * hyper registers (h-REG): the core's VMID, the base and entry count of
//     its NoC routing table in the meta-zone, the RTT bounds RTT_BASE and
//     RTT_END, and the memory-access limit; written only through the
//     configuration bus of the hyper-mode controller;
//   * the meta-zone with the NoC routing table and the range translation
//     table, also written only through that bus;
//   * the weight SRAM (scratchpad, 512 KB as 16-byte lines);
//   * the DMA engine, whose addresses vChunk translates and whose HBM
//     requests the access counter limits per time window;
//   * the send/receive engine and the mesh router (NoC vRouter).
// Instructions (already routed to this physical core by the controller)
// enter a 4-entry FIFO. The head is issued to its unit (DMA for loads and
// stores, the send or receive engine) when that unit is free, so the units
// run in parallel but each serves its instructions in order; a head whose
// unit is busy stalls the queue (counted in n_stall). There is no
// dependency check between units: a program orders dependent instructions
// (a SEND of data that a DMA load brings in) by waiting for the first one's
// completion pulse, the way a fence would.
//
// Weight-SRAM sharing: the single write port goes to the receive engine
// first and the DMA otherwise; the single read port to the send engine
// first and the DMA otherwise. A write to this tile's h-REG or RTT flushes
// vChunk's TLB.
//
// Mesh links: index k of link_* is router port k+1 (left, right, top,
// bottom). Status outputs pulse for one cycle per finished instruction.
// Own choices: the FIFO depth, the issue rule, the SRAM priorities, and
// the h-REG layout (see vnpu_pkg).
module npu_tile
  import vnpu_pkg::*;
#(
  parameter int unsigned MESH_X      = 4,
  parameter int unsigned MESH_Y      = 2,
  parameter int unsigned SPAD_LINES  = 32768,
  parameter int unsigned RT_ENTRIES  = 128,
  parameter int unsigned RTT_ENTRIES = 256,
  parameter int unsigned TLB_ENTRIES = 4,
  parameter int unsigned WINDOW      = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CORE_W-1:0]    my_id,
  // configuration bus from the hyper-mode controller
  input  logic                 tcfg_we,
  input  logic [CORE_W-1:0]    tcfg_core,
  input  tile_cfg_sel_e        tcfg_sel,
  input  logic [7:0]           tcfg_idx,
  input  logic [META_W-1:0]    tcfg_wdata,
  // instruction bus
  input  logic                 ibus_valid,
  input  logic [CORE_W-1:0]    ibus_core,
  input  npu_inst_t            ibus_inst,
  output logic                 ibus_ready,
  // mesh links (left, right, top, bottom)
  input  logic [3:0]           link_in_valid,
  output logic [3:0]           link_in_ready,
  input  flit_t                link_in_flit  [4],
  output logic [3:0]           link_out_valid,
  input  logic [3:0]           link_out_ready,
  output flit_t                link_out_flit [4],
  // HBM channel
  output logic                 hbm_req_valid,
  input  logic                 hbm_req_ready,
  output logic                 hbm_req_we,
  output logic [PA_W-1:0]      hbm_req_addr,
  output logic [LINE_W-1:0]    hbm_req_wdata,
  output logic [SPAD_AW-1:0]   hbm_req_tag,
  input  logic                 hbm_rsp_valid,
  output logic                 hbm_rsp_ready,
  input  logic [SPAD_AW-1:0]   hbm_rsp_tag,
  input  logic [LINE_W-1:0]    hbm_rsp_data,
  // status
  output hreg_t                hreg,
  output logic                 dma_done,
  output logic                 dma_fault,
  output logic                 snd_done,
  output logic                 snd_fault,
  output logic                 rcv_done,
  // statistics
  output logic [31:0]          n_stall,
  output logic [31:0]          n_override,
  output logic [31:0]          n_dor,
  output logic [31:0]          n_tlb_miss,
  output logic [31:0]          n_rtt_reads,
  output logic [31:0]          n_lastv_used,
  output logic [31:0]          n_throttled,
  output logic [15:0]          mem_beats_last,
  output logic [31:0]          n_sent,
  output logic [31:0]          n_recv,
  output logic [31:0]          n_refused
);
  localparam int unsigned SAW = $clog2(SPAD_LINES);
  localparam int unsigned RIW = $clog2(RT_ENTRIES);
  localparam int unsigned TIW = $clog2(RTT_ENTRIES);

  // ---------------- configuration ----------------
  wire my_cfg = tcfg_we && tcfg_core == my_id;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hreg <= '{vmid: '0, rt_base: '0, rt_count: '0, rtt_base: '0, rtt_end: '0, rate_limit: '0};
    end else if (my_cfg && tcfg_sel == TCFG_HREG) begin
      hreg <= hreg_t'(tcfg_wdata[$bits(hreg_t)-1:0]);
    end
  end
  logic tlb_flush;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tlb_flush <= 1'b0;
    else        tlb_flush <= my_cfg && (tcfg_sel == TCFG_HREG || tcfg_sel == TCFG_RTT);
  end

  // ---------------- instruction queue and issue ----------------
  localparam int unsigned IW = $bits(npu_inst_t);
  logic          q_full, q_empty, q_pop;
  logic [IW-1:0] q_dout;
  npu_inst_t     head;
  assign head = npu_inst_t'(q_dout);

  sync_fifo #(.WIDTH(IW), .DEPTH(4)) u_iq (
    .clk, .rst_n,
    .push (ibus_valid && ibus_core == my_id), .din (IW'(ibus_inst)), .full (q_full),
    .pop  (q_pop), .dout (q_dout), .empty (q_empty));
  assign ibus_ready = !q_full;

  logic dma_cmd_ready, snd_ready, rcv_ready;
  wire is_dma  = head.op == OP_DMA_LOAD || head.op == OP_DMA_STORE;
  wire is_send = head.op == OP_SEND;
  wire is_recv = head.op == OP_RECV;
  wire is_nop  = !(is_dma || is_send || is_recv);
  wire dma_go  = !q_empty && is_dma && dma_cmd_ready;
  wire snd_go  = !q_empty && is_send && snd_ready;
  wire rcv_go  = !q_empty && is_recv && rcv_ready;
  assign q_pop = dma_go || snd_go || rcv_go || (!q_empty && is_nop);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    n_stall <= '0;
    else if (!q_empty && !q_pop)   n_stall <= n_stall + 1;
  end

  // ---------------- meta-zone ----------------
  logic [RIW-1:0]  rt_idx   [NPORTS + 1];
  noc_rt_entry_t   rt_entry [NPORTS + 1];
  logic            rtt_re, lv_we, lv_ready;
  logic [TIW-1:0]  rtt_raddr, lv_idx;
  rtt_entry_t      rtt_rdata;
  logic [LASTV_W-1:0] lv_data;

  meta_zone #(.RT_ENTRIES(RT_ENTRIES), .RTT_ENTRIES(RTT_ENTRIES), .N_RT_RD(NPORTS + 1)) u_meta (
    .clk, .rst_n,
    .cfg_we (my_cfg), .cfg_sel (tcfg_sel), .cfg_idx (tcfg_idx), .cfg_wdata (tcfg_wdata),
    .rt_idx, .rt_entry,
    .rtt_re, .rtt_raddr, .rtt_rdata,
    .lv_we, .lv_idx, .lv_data, .lv_ready);

  // ---------------- weight SRAM and its arbitration ----------------
  logic           nv_we, nv_re, dma_we, dma_re;
  logic [SAW-1:0] nv_waddr, nv_raddr, dma_waddr, dma_raddr;
  logic [LINE_W-1:0] nv_wdata, dma_wdata, sram_rdata;

  weight_sram #(.LINES(SPAD_LINES)) u_sram (
    .clk,
    .we    (nv_we || dma_we),
    .waddr (nv_we ? nv_waddr : dma_waddr),
    .wdata (nv_we ? nv_wdata : dma_wdata),
    .re    (nv_re || dma_re),
    .raddr (nv_re ? nv_raddr : dma_raddr),
    .rdata (sram_rdata));

  // ---------------- DMA, vChunk, access counter ----------------
  logic            xl_valid, xl_write, xl_hit, xl_fault;
  logic [VA_W-1:0] xl_va;
  logic [PA_W-1:0] xl_pa;
  logic            allow, beat;
  logic [31:0]     vc_n_miss;

  dma_engine #(.SPAD_LINES(SPAD_LINES)) u_dma (
    .clk, .rst_n,
    .cmd_valid (!q_empty && is_dma), .cmd_ready (dma_cmd_ready),
    .cmd_store (head.op == OP_DMA_STORE), .cmd_va (head.va),
    .cmd_spad (head.spad), .cmd_len (head.len),
    .done (dma_done), .fault (dma_fault),
    .xl_valid, .xl_va, .xl_write, .xl_hit, .xl_pa, .xl_fault,
    .allow, .beat,
    .hbm_req_valid, .hbm_req_ready, .hbm_req_we, .hbm_req_addr, .hbm_req_wdata, .hbm_req_tag,
    .hbm_rsp_valid, .hbm_rsp_ready, .hbm_rsp_tag, .hbm_rsp_data,
    .sram_we (dma_we), .sram_waddr (dma_waddr), .sram_wdata (dma_wdata), .sram_wgnt (!nv_we),
    .sram_re (dma_re), .sram_raddr (dma_raddr), .sram_rgnt (!nv_re), .sram_rdata (sram_rdata));

  vchunk #(.TLB_ENTRIES(TLB_ENTRIES), .RTT_ENTRIES(RTT_ENTRIES)) u_vchunk (
    .clk, .rst_n,
    .rtt_base (hreg.rtt_base), .rtt_end (hreg.rtt_end), .flush (tlb_flush),
    .req_valid (xl_valid), .req_va (xl_va), .req_write (xl_write),
    .hit (xl_hit), .pa (xl_pa), .fault (xl_fault),
    .rtt_re, .rtt_raddr, .rtt_rdata, .lv_we, .lv_idx, .lv_data, .lv_ready,
    .n_miss (vc_n_miss), .n_rtt_reads, .n_lastv_used, .rtt_cur ());
  assign n_tlb_miss = vc_n_miss;

  access_counter #(.WINDOW(WINDOW)) u_acc (
    .clk, .rst_n, .limit (hreg.rate_limit), .beat, .allow,
    .count (), .last_count (mem_beats_last), .n_throttled);

  // ---------------- NoC vRouter: send/receive engine and router ----------------
  logic  inj_valid, inj_ready, ej_valid, ej_ready;
  logic [RIW-1:0] nv_rt_idx;
  noc_rt_entry_t  nv_rt_entry;
  flit_t inj_flit, ej_flit;

  noc_vrouter #(.SPAD_LINES(SPAD_LINES), .RT_ENTRIES(RT_ENTRIES)) u_nv (
    .clk, .rst_n, .my_id, .my_vmid (hreg.vmid),
    .snd_valid (!q_empty && is_send), .snd_ready,
    .snd_spad (head.spad), .snd_len (head.len), .snd_step (head.step),
    .snd_dst_vcore (head.dst_vcore), .snd_done, .snd_fault,
    .rcv_valid (!q_empty && is_recv), .rcv_ready,
    .rcv_spad (head.spad), .rcv_len (head.len), .rcv_step (head.step), .rcv_done,
    .rt_idx (nv_rt_idx), .rt_entry (nv_rt_entry),
    .sram_re (nv_re), .sram_raddr (nv_raddr), .sram_rdata (sram_rdata),
    .sram_we (nv_we), .sram_waddr (nv_waddr), .sram_wdata (nv_wdata),
    .inj_valid, .inj_ready, .inj_flit, .ej_valid, .ej_ready, .ej_flit,
    .n_sent, .n_recv, .n_refused);

  logic [NPORTS-1:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  flit_t             r_in_flit [NPORTS], r_out_flit [NPORTS];
  logic [RIW-1:0]    r_rt_idx [NPORTS];
  noc_rt_entry_t     r_rt_entry [NPORTS];

  assign r_in_valid[P_LOCAL]  = inj_valid;
  assign r_in_flit[P_LOCAL]   = inj_flit;
  assign inj_ready            = r_in_ready[P_LOCAL];
  assign ej_valid             = r_out_valid[P_LOCAL];
  assign ej_flit              = r_out_flit[P_LOCAL];
  assign r_out_ready[P_LOCAL] = ej_ready;
  for (genvar k = 0; k < 4; k++) begin : g_link
    assign r_in_valid[k+1]   = link_in_valid[k];
    assign r_in_flit[k+1]    = link_in_flit[k];
    assign link_in_ready[k]  = r_in_ready[k+1];
    assign link_out_valid[k] = r_out_valid[k+1];
    assign link_out_flit[k]  = r_out_flit[k+1];
    assign r_out_ready[k+1]  = link_out_ready[k];
  end
  // Routing-table lookups are relative to the h-REG's table base; a virtual
  // core at or beyond the table's entry count has no entry.
  for (genvar p = 0; p < NPORTS; p++) begin : g_rt
    assign rt_idx[p]     = r_rt_idx[p] + RIW'(hreg.rt_base);
    assign r_rt_entry[p] = (CORE_W'(r_rt_idx[p]) < hreg.rt_count) ? rt_entry[p] : '0;
  end
  assign rt_idx[NPORTS] = nv_rt_idx + RIW'(hreg.rt_base);
  assign nv_rt_entry    = (CORE_W'(nv_rt_idx) < hreg.rt_count) ? rt_entry[NPORTS] : '0;

  noc_router #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .RT_ENTRIES(RT_ENTRIES)) u_router (
    .clk, .rst_n, .my_id, .my_vmid (hreg.vmid),
    .in_valid (r_in_valid), .in_ready (r_in_ready), .in_flit (r_in_flit),
    .out_valid (r_out_valid), .out_ready (r_out_ready), .out_flit (r_out_flit),
    .rt_idx (r_rt_idx), .rt_entry (r_rt_entry),
    .n_override, .n_dor);

  // The queue head goes to at most one unit per cycle.
  a_one_issue: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({dma_go, snd_go, rcv_go}));
endmodule
