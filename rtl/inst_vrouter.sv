// inst_vrouter: instruction vRouter of the NPU controller.
//
// Every NPU instruction arrives with the VMID of the virtual function that
// issued it and a virtual core ID. The vRouter rewrites the core ID to a
// physical core ID, as the paper describes, with two kinds of routing table:
//   * standard: one entry per virtual core, {v_CoreID, p_CoreID};
//   * 2D mesh: a single entry {first v_CoreID, first p_CoreID, shape x, shape y};
//     virtual core v maps to p_first + (off / x) * MESH_X + (off % x),
//     off = v - v_first, valid for off < x*y.
// A routing-table root, indexed by VMID, gives each table's type, size and
// base in the routing-table SRAM. A virtual core outside the VM's table is
// rejected (fault pulse) and the instruction is dropped, which isolates VMs.
// Following the paper, a run of instructions to the same (VMID, core) does
// not query the table again: the last translation is kept in a register.
//
// Timing: an accepted instruction whose (VMID, core) equals the previous one
// leaves one cycle later; otherwise the root is read (1 cycle) and the SRAM
// is read (1 cycle, synchronous), and the translated instruction leaves three
// cycles after acceptance. One instruction is in flight at a time.
// Handshakes are valid/ready; out_* holds while out_valid && !out_ready.
// Table writes (hyper mode only, checked by the controller) clear the
// last-translation register.
//
// Own choices: the root is a register array, the RT SRAM has one
// synchronous read port, and the latency figures above.
module inst_vrouter
  import vnpu_pkg::*;
#(
  parameter int unsigned RT_ENTRIES = 128,
  parameter int unsigned NUM_VM     = 16,
  parameter int unsigned MESH_X     = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration (hyper mode)
  input  logic                          root_we,
  input  logic [VMID_W-1:0]             root_idx,
  input  rt_root_t                      root_wdata,
  input  logic                          sram_we,
  input  logic [$clog2(RT_ENTRIES)-1:0] sram_idx,
  input  rt_sram_entry_t                sram_wdata,
  // guest instruction in
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [VMID_W-1:0]             in_vmid,
  input  npu_inst_t                     in_inst,
  // translated instruction out (core = physical core)
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [VMID_W-1:0]             out_vmid,
  output npu_inst_t                     out_inst,
  // isolation fault
  output logic                          fault,
  output logic [VMID_W-1:0]             fault_vmid,
  output logic [CORE_W-1:0]             fault_vcore,
  // statistics
  output logic [31:0]                   n_lookups,
  output logic [31:0]                   n_reuse
);
  localparam int unsigned IW = $clog2(RT_ENTRIES);

  typedef enum logic [1:0] {S_IDLE, S_ROOT, S_SRAM, S_OUT} state_e;
  state_e state;

  rt_root_t       root_q [NUM_VM];
  rt_sram_entry_t rt_mem [RT_ENTRIES];
  rt_sram_entry_t rd_q;
  logic [IW-1:0]  rd_addr;
  logic           rd_en;

  npu_inst_t         inst_q;
  logic [VMID_W-1:0] vmid_q;
  rt_root_t          root_sel_q;

  logic              last_valid;
  logic [VMID_W-1:0] last_vmid;
  logic [CORE_W-1:0] last_vcore, last_pcore;

  // routing-table SRAM: one write port, one synchronous read port
  always_ff @(posedge clk) begin
    if (sram_we) rt_mem[sram_idx] <= sram_wdata;
    if (rd_en)   rd_q <= rt_mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_VM; i++) root_q[i] <= '0;
    end else if (root_we) begin
      root_q[root_idx] <= root_wdata;
    end
  end

  // SRAM address from the root entry
  always_comb begin
    rd_en   = (state == S_ROOT);
    rd_addr = IW'(root_sel_q.base);
    if (root_sel_q.rtype == RT_STANDARD)
      rd_addr = IW'(root_sel_q.base + inst_q.core);
  end

  // translation of the SRAM entry read in S_ROOT
  logic              tr_ok;
  logic [CORE_W-1:0] tr_pcore;
  logic [CORE_W-1:0] off, vx, vy;
  logic [2*CORE_W-1:0] area;
  always_comb begin
    tr_ok    = 1'b0;
    tr_pcore = '0;
    off      = inst_q.core - rd_q.a;
    area     = rd_q.c * rd_q.d;
    vx       = '0;
    vy       = '0;
    if (!root_sel_q.valid) begin
      tr_ok = 1'b0;
    end else if (root_sel_q.rtype == RT_STANDARD) begin
      tr_ok    = (inst_q.core < root_sel_q.count) && (rd_q.a == inst_q.core);
      tr_pcore = rd_q.b;
    end else if (rd_q.c != '0) begin
      vx       = off % rd_q.c;
      vy       = off / rd_q.c;
      tr_ok    = (inst_q.core >= rd_q.a) && ({{CORE_W{1'b0}}, off} < area);
      tr_pcore = CORE_W'(rd_q.b + vy * CORE_W'(MESH_X) + vx);
    end
  end

  assign in_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      inst_q      <= '0;
      vmid_q      <= '0;
      root_sel_q  <= '0;
      last_valid  <= 1'b0;
      last_vmid   <= '0;
      last_vcore  <= '0;
      last_pcore  <= '0;
      out_valid   <= 1'b0;
      out_vmid    <= '0;
      out_inst    <= '0;
      fault       <= 1'b0;
      fault_vmid  <= '0;
      fault_vcore <= '0;
      n_lookups   <= '0;
      n_reuse     <= '0;
    end else begin
      fault <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          inst_q <= in_inst;
          vmid_q <= in_vmid;
          if (last_valid && !root_we && !sram_we &&
              last_vmid == in_vmid && last_vcore == in_inst.core) begin
            out_valid     <= 1'b1;
            out_vmid      <= in_vmid;
            out_inst      <= in_inst;
            out_inst.core <= last_pcore;
            n_reuse       <= n_reuse + 1;
            state         <= S_OUT;
          end else begin
            root_sel_q <= root_q[in_vmid];
            state      <= S_ROOT;
          end
        end
        S_ROOT: state <= S_SRAM;
        S_SRAM: begin
          n_lookups <= n_lookups + 1;
          if (tr_ok) begin
            out_valid     <= 1'b1;
            out_vmid      <= vmid_q;
            out_inst      <= inst_q;
            out_inst.core <= tr_pcore;
            last_valid    <= 1'b1;
            last_vmid     <= vmid_q;
            last_vcore    <= inst_q.core;
            last_pcore    <= tr_pcore;
            state         <= S_OUT;
          end else begin
            fault       <= 1'b1;
            fault_vmid  <= vmid_q;
            fault_vcore <= inst_q.core;
            state       <= S_IDLE;
          end
        end
        S_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (root_we || sram_we) last_valid <= 1'b0;
    end
  end

  // An offered instruction is held until taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_inst));

endmodule
