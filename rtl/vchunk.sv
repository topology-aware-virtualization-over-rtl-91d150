// vchunk: range-based memory virtualization for one core's DMA engine.
//
// Translates 48-bit virtual addresses of DMA requests to 48-bit physical
// HBM addresses using variable-size ranges, as the paper proposes in place
// of fixed-size pages. The range translation table (RTT) sits in the
// meta-zone, sorted by virtual address, between the hyper registers
// RTT_BASE and RTT_END (inclusive). A small fully associative range TLB
// (4 entries by default) holds recently used RTT entries.
//
// Lookup: a request hits when a TLB entry covers the address
// (va <= addr < va + size). The translation is pa + (addr - va),
// combinational in the same cycle. A hit without the needed permission
// (R for reads, W for writes) is a fault.
//
// Miss handling, as the paper describes, exploits the access patterns of
// NPU workloads:
//   1. RTT_CUR is the index of the entry in use. If its last_v field holds
//      the index of the entry that followed it in the previous iteration,
//      that entry is read first;
//   2. otherwise, or if it does not cover the address, entries are read one
//      after the other from RTT_CUR+1, wrapping from RTT_END to RTT_BASE,
//      until one covers the address (fault after a full pass);
//   3. the found entry goes into the TLB (round-robin replacement), the
//      last_v field of the previous RTT_CUR entry is set to its index in the
//      meta-zone, and RTT_CUR moves to it.
// A TLB hit on an entry other than RTT_CUR also moves RTT_CUR to it.
//
// Timing: each RTT read takes two cycles (read, check); a miss whose last_v
// guess is right is served three cycles after it is seen, and the request is
// a hit in the fourth. The requester holds req_valid and req_va until hit or
// fault. flush empties the TLB and forgets RTT_CUR (used when the hypervisor
// rewrites the tables).
//
// Own choices: the RTT index of an entry (8 bits) is kept with it in the
// TLB, LASTV_NULL (all ones) means "not recorded", an entry of size 0 is
// unused, and the permission bit order (see vnpu_pkg).
module vchunk
  import vnpu_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 4,
  parameter int unsigned RTT_ENTRIES = 256
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [LASTV_W-1:0]             rtt_base,
  input  logic [LASTV_W-1:0]             rtt_end,
  input  logic                           flush,
  // translation request
  input  logic                           req_valid,
  input  logic [VA_W-1:0]                req_va,
  input  logic                           req_write,
  output logic                           hit,
  output logic [PA_W-1:0]                pa,
  output logic                           fault,
  // meta-zone RTT port
  output logic                           rtt_re,
  output logic [$clog2(RTT_ENTRIES)-1:0] rtt_raddr,
  input  rtt_entry_t                     rtt_rdata,
  output logic                           lv_we,
  output logic [$clog2(RTT_ENTRIES)-1:0] lv_idx,
  output logic [LASTV_W-1:0]             lv_data,
  input  logic                           lv_ready,
  // statistics
  output logic [31:0]                    n_miss,
  output logic [31:0]                    n_rtt_reads,
  output logic [31:0]                    n_lastv_used,
  output logic [LASTV_W-1:0]             rtt_cur
);
  localparam int unsigned TIW = $clog2(RTT_ENTRIES);
  localparam int unsigned PW  = (TLB_ENTRIES > 1) ? $clog2(TLB_ENTRIES) : 1;

  typedef struct packed {
    logic               valid;
    rtt_entry_t         e;
    logic [LASTV_W-1:0] idx;
  } tlb_t;

  tlb_t tlb [TLB_ENTRIES];
  logic [PW-1:0] repl;

  function automatic logic covers(input rtt_entry_t e, input logic [VA_W-1:0] a);
    logic [VA_W:0] off;
    off = {1'b0, a} - {1'b0, e.va};
    return (e.size != '0) && (a >= e.va) && (off < (VA_W+1)'(e.size));
  endfunction

  // ---- TLB lookup (combinational) ----
  logic             tlb_hit;
  logic [PW-1:0]    hit_way;
  rtt_entry_t       hit_e;
  logic [LASTV_W-1:0] hit_idx;
  always_comb begin
    tlb_hit = 1'b0;
    hit_way = '0;
    for (int w = 0; w < TLB_ENTRIES; w++)
      if (!tlb_hit && tlb[w].valid && covers(tlb[w].e, req_va)) begin
        tlb_hit = 1'b1;
        hit_way = PW'(w);
      end
    hit_e   = tlb[hit_way].e;
    hit_idx = tlb[hit_way].idx;
  end

  logic perm_ok;
  assign perm_ok = req_write ? hit_e.perm[PERM_W_BIT] : hit_e.perm[PERM_R];
  assign pa      = hit_e.pa + PA_W'(req_va - hit_e.va);
  assign hit     = req_valid && tlb_hit && perm_ok && !flush;

  // ---- walker ----
  typedef enum logic [1:0] {W_IDLE, W_READ, W_CHECK, W_FAULT} wstate_e;
  wstate_e            ws;
  logic [LASTV_W-1:0] idx;        // entry being read
  logic               try_lv;     // current read is the last_v guess
  logic [LASTV_W:0]   scanned;    // sequential reads done
  logic               cur_valid;
  logic [LASTV_W-1:0] cur_lastv;
  logic               lv_pend;

  function automatic logic [LASTV_W-1:0] nxt(input logic [LASTV_W-1:0] i);
    return (i == rtt_end) ? rtt_base : i + 1'b1;
  endfunction

  logic [LASTV_W:0] n_total;
  assign n_total = {1'b0, rtt_end} - {1'b0, rtt_base} + 1'b1;

  wire miss = req_valid && !tlb_hit && !flush;
  assign fault = (req_valid && tlb_hit && !perm_ok && !flush) || (ws == W_FAULT);

  assign rtt_re    = (ws == W_READ);
  assign rtt_raddr = TIW'(idx);
  wire   found     = covers(rtt_rdata, req_va);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < TLB_ENTRIES; w++) tlb[w] <= '0;
      repl         <= '0;
      ws           <= W_IDLE;
      idx          <= '0;
      try_lv       <= 1'b0;
      scanned      <= '0;
      cur_valid    <= 1'b0;
      rtt_cur      <= '0;
      cur_lastv    <= LASTV_NULL;
      lv_pend      <= 1'b0;
      lv_idx       <= '0;
      lv_data      <= '0;
      n_miss       <= '0;
      n_rtt_reads  <= '0;
      n_lastv_used <= '0;
    end else if (flush) begin
      for (int w = 0; w < TLB_ENTRIES; w++) tlb[w].valid <= 1'b0;
      ws        <= W_IDLE;
      cur_valid <= 1'b0;
      lv_pend   <= 1'b0;
    end else begin
      if (lv_pend && lv_ready) lv_pend <= 1'b0;
      // a hit on another entry makes it the current one
      if (hit && ws == W_IDLE && (!cur_valid || hit_idx != rtt_cur)) begin
        rtt_cur   <= hit_idx;
        cur_lastv <= hit_e.last_v;
        cur_valid <= 1'b1;
      end
      unique case (ws)
        W_IDLE: if (miss && !lv_pend) begin
          n_miss  <= n_miss + 1;
          scanned <= '0;
          if (cur_valid && cur_lastv != LASTV_NULL) begin
            idx    <= cur_lastv;
            try_lv <= 1'b1;
          end else begin
            idx    <= cur_valid ? nxt(rtt_cur) : rtt_base;
            try_lv <= 1'b0;
          end
          ws <= W_READ;
        end
        W_READ: begin
          n_rtt_reads <= n_rtt_reads + 1;
          ws <= W_CHECK;
        end
        W_CHECK: begin
          if (!req_valid) begin
            ws <= W_IDLE;                  // request withdrawn
          end else if (found) begin
            tlb[repl] <= '{valid: 1'b1, e: rtt_rdata, idx: idx};
            repl      <= (repl == PW'(TLB_ENTRIES - 1)) ? '0 : repl + 1'b1;
            if (try_lv) n_lastv_used <= n_lastv_used + 1;
            if (cur_valid && idx != rtt_cur && cur_lastv != idx) begin
              lv_pend <= 1'b1;             // record "idx followed rtt_cur"
              lv_idx  <= TIW'(rtt_cur);
              lv_data <= idx;
              for (int w = 0; w < TLB_ENTRIES; w++)
                if (tlb[w].idx == rtt_cur && PW'(w) != repl) tlb[w].e.last_v <= idx;
            end
            rtt_cur   <= idx;
            cur_lastv <= rtt_rdata.last_v;
            cur_valid <= 1'b1;
            ws        <= W_IDLE;
          end else if (!try_lv && scanned + 1'b1 >= n_total) begin
            ws <= W_FAULT;
          end else begin
            if (!try_lv) scanned <= scanned + 1'b1;
            idx    <= try_lv ? (cur_valid ? nxt(rtt_cur) : rtt_base) : nxt(idx);
            try_lv <= 1'b0;
            ws     <= W_READ;
          end
        end
        W_FAULT: ws <= W_IDLE;
        default: ws <= W_IDLE;
      endcase
    end
  end

  assign lv_we = lv_pend;

endmodule
