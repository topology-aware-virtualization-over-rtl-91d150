// meta_zone: the protected meta-zone of one core's local memory.
//
// It holds the two meta tables the paper places here:
//   * the NoC routing table, indexed by v_CoreID: {valid, p_CoreID,
//     direction}. It is a register array with combinational read ports
//     (the paper reports that a 128-entry table costs flip-flops and almost
//     no LUTs), one per router input plus one for the send engine;
//   * the range translation table (RTT): entries {VA 48, PA 48, Size 32,
//     Perm 4, last_v 8}, read through one synchronous port (data one cycle
//     after rtt_re).
// Only the configuration port writes whole entries; the tile connects it to
// the hyper-mode controller alone, so guest instructions cannot change the
// tables. The core itself may update only the last_v field of an RTT entry
// (lv_* port), as vChunk requires; a configuration write to the RTT in the
// same cycle wins and lv_ready drops.
//
// Own choices: last_v is kept in its own small array so that it can be
// written without a read-modify-write; the meta word is 144 bits wide (the
// paper's range-TLB entry width), the low 140 bits holding an RTT entry or
// the low bits a routing-table entry.
module meta_zone
  import vnpu_pkg::*;
#(
  parameter int unsigned RT_ENTRIES  = 128,
  parameter int unsigned RTT_ENTRIES = 256,
  parameter int unsigned N_RT_RD     = NPORTS + 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // configuration (hyper-mode controller only)
  input  logic                           cfg_we,
  input  tile_cfg_sel_e                  cfg_sel,
  input  logic [7:0]                     cfg_idx,
  input  logic [META_W-1:0]              cfg_wdata,
  // routing table, combinational reads
  input  logic [$clog2(RT_ENTRIES)-1:0]  rt_idx   [N_RT_RD],
  output noc_rt_entry_t                  rt_entry [N_RT_RD],
  // RTT, synchronous read
  input  logic                           rtt_re,
  input  logic [$clog2(RTT_ENTRIES)-1:0] rtt_raddr,
  output rtt_entry_t                     rtt_rdata,
  // last_v update from vChunk
  input  logic                           lv_we,
  input  logic [$clog2(RTT_ENTRIES)-1:0] lv_idx,
  input  logic [LASTV_W-1:0]             lv_data,
  output logic                           lv_ready
);
  localparam int unsigned RW  = $bits(noc_rt_entry_t);
  localparam int unsigned TW  = $bits(rtt_entry_t) - LASTV_W;  // VA, PA, size, perm
  localparam int unsigned RIW = $clog2(RT_ENTRIES);
  localparam int unsigned TIW = $clog2(RTT_ENTRIES);

  noc_rt_entry_t        rt_q   [RT_ENTRIES];
  logic [TW-1:0]        rtt_mem [RTT_ENTRIES];
  logic [LASTV_W-1:0]   lv_mem  [RTT_ENTRIES];
  logic [TW-1:0]        rd_body;
  logic [LASTV_W-1:0]   rd_lv;

  wire cfg_rt  = cfg_we && cfg_sel == TCFG_RT;
  wire cfg_rtt = cfg_we && cfg_sel == TCFG_RTT;

  // routing table: reset to invalid so that no core is reachable before
  // the hypervisor grants it
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < RT_ENTRIES; i++) rt_q[i] <= '0;
    end else if (cfg_rt) begin
      rt_q[RIW'(cfg_idx)] <= noc_rt_entry_t'(cfg_wdata[RW-1:0]);
    end
  end

  for (genvar r = 0; r < N_RT_RD; r++) begin : g_rd
    assign rt_entry[r] = rt_q[rt_idx[r]];
  end

  assign lv_ready = !cfg_rtt;

  always_ff @(posedge clk) begin
    if (cfg_rtt) begin
      rtt_mem[TIW'(cfg_idx)] <= cfg_wdata[LASTV_W +: TW];
      lv_mem[TIW'(cfg_idx)]  <= cfg_wdata[LASTV_W-1:0];
    end else if (lv_we) begin
      lv_mem[lv_idx] <= lv_data;
    end
    if (rtt_re) begin
      rd_body <= rtt_mem[rtt_raddr];
      rd_lv   <= lv_mem[rtt_raddr];
    end
  end

  assign rtt_rdata = rtt_entry_t'({rd_body, rd_lv});

endmodule
