// noc_vrouter: send/receive engine of one core with the NoC vRouter.
//
// SEND {spad, len, step, dst_vcore}: the guest names its destination by
// virtual core ID. As the paper describes, the engine rewrites it to the
// physical core ID from this core's routing table (in the meta-zone); a
// virtual core without a valid entry does not belong to the VM, so the
// instruction is refused (fault) and nothing is sent. Otherwise len lines
// are read from the weight SRAM at spad, spad+step, ... and injected into
// the local router as flits tagged with {VMID, dst_vcore, dst_pcore,
// source core, last}. Reads are issued ahead while at most three lines are
// in flight or buffered (a four-entry output FIFO), which covers the
// two-cycle read-to-FIFO latency, so one flit leaves per cycle when the NoC
// accepts it.
//
// RECV {spad, len, step}: the next len flits that arrive at this core are
// written to spad, spad+step, ... Until a RECV is active, arriving flits
// wait in the network (ready low), which gives the send/receive handshake.
// SEND and RECV run independently of each other.
//
// Timing: SEND's first flit is offered three cycles after the command is
// accepted; then one flit per cycle. A 2048-byte routing packet is 128
// flits. The SRAM ports are assumed granted every cycle (the tile gives the
// engine priority). Own choices: flit format, the look-ahead depth, and that
// RECV takes flits in arrival order without checking the sender.
module noc_vrouter
  import vnpu_pkg::*;
#(
  parameter int unsigned SPAD_LINES = 32768,
  parameter int unsigned RT_ENTRIES = 128
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [CORE_W-1:0]             my_id,
  input  logic [VMID_W-1:0]             my_vmid,
  // SEND command
  input  logic                          snd_valid,
  output logic                          snd_ready,
  input  logic [SPAD_AW-1:0]            snd_spad,
  input  logic [LEN_W-1:0]              snd_len,
  input  logic [LEN_W-1:0]              snd_step,
  input  logic [CORE_W-1:0]             snd_dst_vcore,
  output logic                          snd_done,
  output logic                          snd_fault,
  // RECV command
  input  logic                          rcv_valid,
  output logic                          rcv_ready,
  input  logic [SPAD_AW-1:0]            rcv_spad,
  input  logic [LEN_W-1:0]              rcv_len,
  input  logic [LEN_W-1:0]              rcv_step,
  output logic                          rcv_done,
  // routing-table lookup (meta-zone)
  output logic [$clog2(RT_ENTRIES)-1:0] rt_idx,
  input  noc_rt_entry_t                 rt_entry,
  // weight SRAM
  output logic                          sram_re,
  output logic [$clog2(SPAD_LINES)-1:0] sram_raddr,
  input  logic [LINE_W-1:0]             sram_rdata,
  output logic                          sram_we,
  output logic [$clog2(SPAD_LINES)-1:0] sram_waddr,
  output logic [LINE_W-1:0]             sram_wdata,
  // local router port
  output logic                          inj_valid,
  input  logic                          inj_ready,
  output flit_t                         inj_flit,
  input  logic                          ej_valid,
  output logic                          ej_ready,
  input  flit_t                         ej_flit,
  // statistics
  output logic [31:0]                   n_sent,
  output logic [31:0]                   n_recv,
  output logic [31:0]                   n_refused
);
  localparam int unsigned SAW = $clog2(SPAD_LINES);

  // ---------------- SEND ----------------
  logic               s_busy;
  logic [SPAD_AW-1:0] s_addr;
  logic [LEN_W-1:0]   s_len, s_step, s_issued, s_sent;
  logic [CORE_W-1:0]  s_vdst, s_pdst;
  logic               rd_pend, rd_last;
  logic [2:0]         occ;          // lines in flight or buffered
  logic               fifo_full, fifo_empty;
  logic [LINE_W:0]    fifo_dout;

  assign rt_idx    = $clog2(RT_ENTRIES)'(snd_dst_vcore);
  assign snd_ready = !s_busy;

  wire issue = s_busy && s_issued != s_len && occ < 3'd3;
  assign sram_re    = issue;
  assign sram_raddr = SAW'(s_addr);

  wire inj_fire = inj_valid && inj_ready;

  sync_fifo #(.WIDTH(LINE_W + 1), .DEPTH(4)) u_out (
    .clk, .rst_n,
    .push (rd_pend), .din ({rd_last, sram_rdata}), .full (fifo_full),
    .pop  (inj_fire), .dout (fifo_dout), .empty (fifo_empty));

  assign inj_valid = !fifo_empty;
  always_comb begin
    inj_flit           = '0;
    inj_flit.vmid      = my_vmid;
    inj_flit.dst_vcore = s_vdst;
    inj_flit.dst_pcore = s_pdst;
    inj_flit.src_pcore = my_id;
    inj_flit.last      = fifo_dout[LINE_W];
    inj_flit.data      = fifo_dout[LINE_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_busy    <= 1'b0;
      s_addr    <= '0;
      s_len     <= '0;
      s_step    <= '0;
      s_issued  <= '0;
      s_sent    <= '0;
      s_vdst    <= '0;
      s_pdst    <= '0;
      rd_pend   <= 1'b0;
      rd_last   <= 1'b0;
      occ       <= '0;
      snd_done  <= 1'b0;
      snd_fault <= 1'b0;
      n_sent    <= '0;
      n_refused <= '0;
    end else begin
      snd_done  <= 1'b0;
      snd_fault <= 1'b0;
      rd_pend   <= issue;
      rd_last   <= issue && (s_issued + 1'b1 == s_len);
      occ       <= occ + 3'(issue) - 3'(inj_fire);
      if (issue) begin
        s_issued <= s_issued + 1'b1;
        s_addr   <= s_addr + s_step;
      end
      if (inj_fire) begin
        n_sent <= n_sent + 1;
        s_sent <= s_sent + 1'b1;
        if (s_sent + 1'b1 == s_len) begin
          s_busy   <= 1'b0;
          snd_done <= 1'b1;
        end
      end
      if (snd_valid && !s_busy) begin
        if (!rt_entry.valid) begin
          snd_done  <= 1'b1;
          snd_fault <= 1'b1;
          n_refused <= n_refused + 1;
        end else if (snd_len == '0) begin
          snd_done <= 1'b1;
        end else begin
          s_busy   <= 1'b1;
          s_addr   <= snd_spad;
          s_len    <= snd_len;
          s_step   <= snd_step;
          s_issued <= '0;
          s_sent   <= '0;
          s_vdst   <= snd_dst_vcore;
          s_pdst   <= rt_entry.pcore;   // virtual -> physical rewrite
        end
      end
    end
  end

  // ---------------- RECV ----------------
  logic               r_busy;
  logic [SPAD_AW-1:0] r_addr;
  logic [LEN_W-1:0]   r_left, r_step;

  assign rcv_ready  = !r_busy;
  assign ej_ready   = r_busy;
  wire   ej_fire    = ej_valid && ej_ready;
  assign sram_we    = ej_fire;
  assign sram_waddr = SAW'(r_addr);
  assign sram_wdata = ej_flit.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_busy   <= 1'b0;
      r_addr   <= '0;
      r_left   <= '0;
      r_step   <= '0;
      rcv_done <= 1'b0;
      n_recv   <= '0;
    end else begin
      rcv_done <= 1'b0;
      if (ej_fire) begin
        n_recv <= n_recv + 1;
        r_addr <= r_addr + r_step;
        r_left <= r_left - 1'b1;
        if (r_left == LEN_W'(1)) begin
          r_busy   <= 1'b0;
          rcv_done <= 1'b1;
        end
      end
      if (rcv_valid && !r_busy) begin
        if (rcv_len == '0) rcv_done <= 1'b1;
        else begin
          r_busy <= 1'b1;
          r_addr <= rcv_spad;
          r_left <= rcv_len;
          r_step <= rcv_step;
        end
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_pend && fifo_full));
endmodule
