// noc_router: 2D-mesh router of one NPU core with the NoC vRouter's
// direction override.
//
// Five ports (local, left, right, top, bottom), each with a small input
// FIFO. Every flit carries its physical and virtual destination and its
// VMID. The output port of the flit at the head of each FIFO is chosen as
// the paper describes for NoC virtualization:
//   * the flit has arrived (dst_pcore == my_id): local port;
//   * else, if the flit belongs to this core's VM (vmid == my_vmid) and this
//     core's routing-table entry for the destination virtual core holds a
//     predefined direction, that direction is taken: this keeps the packets
//     of an irregular virtual topology inside it;
//   * else X-then-Y dimension-order routing (deadlock-free default).
// Each output port grants one requesting input per cycle in round-robin
// order. A flit moves one hop per cycle: it is written into the next
// router's input FIFO at the clock edge after it reaches the FIFO head.
//
// Interface: in_*/out_* are valid/ready links per port; rt_idx/rt_entry
// are one combinational lookup per input into the core's routing table
// (held in the meta-zone). my_id/my_vmid come from the core's position and
// hyper registers. n_override/n_dor count flits routed each way.
//
// Own choices: per-flit routing (no wormhole), FIFO depth, round-robin
// arbitration, direction encoding, and that a direction is used only for
// flits of the router's own VM.
module noc_router
  import vnpu_pkg::*;
#(
  parameter int unsigned MESH_X     = 4,
  parameter int unsigned MESH_Y     = 2,
  parameter int unsigned RT_ENTRIES = 128,
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [CORE_W-1:0]             my_id,
  input  logic [VMID_W-1:0]             my_vmid,
  input  logic [NPORTS-1:0]             in_valid,
  output logic [NPORTS-1:0]             in_ready,
  input  flit_t                         in_flit  [NPORTS],
  output logic [NPORTS-1:0]             out_valid,
  input  logic [NPORTS-1:0]             out_ready,
  output flit_t                         out_flit [NPORTS],
  output logic [$clog2(RT_ENTRIES)-1:0] rt_idx   [NPORTS],
  input  noc_rt_entry_t                 rt_entry [NPORTS],
  output logic [31:0]                   n_override,
  output logic [31:0]                   n_dor
);
  localparam int unsigned FW = $bits(flit_t);
  localparam int unsigned IW = $clog2(RT_ENTRIES);

  flit_t             head   [NPORTS];
  logic [NPORTS-1:0] empty, full, pop;
  logic [2:0]        route  [NPORTS];   // chosen output port per input
  logic [NPORTS-1:0] by_dir;            // route came from a predefined direction

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    logic [FW-1:0] dout;
    sync_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push (in_valid[i]), .din (FW'(in_flit[i])), .full (full[i]),
      .pop  (pop[i]),      .dout (dout),           .empty (empty[i]));
    assign head[i]     = flit_t'(dout);
    assign in_ready[i] = !full[i];
    assign rt_idx[i]   = IW'(head[i].dst_vcore);
  end

  logic [CORE_W-1:0] my_x, my_y;
  assign my_x = CORE_W'(my_id % CORE_W'(MESH_X));
  assign my_y = CORE_W'(my_id / CORE_W'(MESH_X));

  function automatic logic [2:0] dir_port(input dir_e d);
    unique case (d)
      DIR_LEFT:   return 3'(P_LEFT);
      DIR_RIGHT:  return 3'(P_RIGHT);
      DIR_TOP:    return 3'(P_TOP);
      DIR_BOTTOM: return 3'(P_BOT);
      default:    return 3'(P_LOCAL);
    endcase
  endfunction

  always_comb begin
    for (int i = 0; i < NPORTS; i++) begin
      logic [CORE_W-1:0] dx, dy;
      dx = CORE_W'(head[i].dst_pcore % CORE_W'(MESH_X));
      dy = CORE_W'(head[i].dst_pcore / CORE_W'(MESH_X));
      by_dir[i] = 1'b0;
      if (head[i].dst_pcore == my_id) begin
        route[i] = 3'(P_LOCAL);
      end else if (head[i].vmid == my_vmid && rt_entry[i].valid &&
                   rt_entry[i].dir != DIR_NULL && rt_entry[i].dir != DIR_LOCAL) begin
        route[i]  = dir_port(rt_entry[i].dir);
        by_dir[i] = 1'b1;
      end else if (dx < my_x) route[i] = 3'(P_LEFT);
      else if (dx > my_x)     route[i] = 3'(P_RIGHT);
      else if (dy < my_y)     route[i] = 3'(P_TOP);
      else                    route[i] = 3'(P_BOT);
    end
  end

  // round-robin arbitration per output
  logic [2:0] rr   [NPORTS];
  logic [2:0] gsel [NPORTS];
  logic [NPORTS-1:0] gvalid;
  always_comb begin
    pop = '0;
    for (int o = 0; o < NPORTS; o++) begin
      gvalid[o] = 1'b0;
      gsel[o]   = '0;
      for (int k = 0; k < NPORTS; k++) begin
        logic [2:0] i;
        i = 3'((int'(rr[o]) + k) % NPORTS);
        if (!gvalid[o] && !empty[i] && route[i] == 3'(o)) begin
          gvalid[o] = 1'b1;
          gsel[o]   = i;
        end
      end
      out_valid[o] = gvalid[o];
      out_flit[o]  = head[gsel[o]];
      if (gvalid[o] && out_ready[o]) pop[gsel[o]] = 1'b1;
    end
  end

  // flits forwarded this cycle, by routing method
  logic [2:0] nov, ndor;
  always_comb begin
    nov  = '0;
    ndor = '0;
    for (int i = 0; i < NPORTS; i++)
      if (pop[i] && route[i] != 3'(P_LOCAL)) begin
        if (by_dir[i]) nov = nov + 3'd1;
        else           ndor = ndor + 3'd1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NPORTS; o++) rr[o] <= '0;
      n_override <= '0;
      n_dor      <= '0;
    end else begin
      for (int o = 0; o < NPORTS; o++)
        if (gvalid[o] && out_ready[o])
          rr[o] <= (gsel[o] == 3'(NPORTS - 1)) ? 3'd0 : gsel[o] + 3'd1;
      n_override <= n_override + 32'(nov);
      n_dor      <= n_dor + 32'(ndor);
    end
  end

  // A flit never leaves through a port that has no neighbour.
  a_in_mesh: assert property (@(posedge clk) disable iff (!rst_n)
    !(out_valid[P_LEFT]  && my_x == 0) && !(out_valid[P_RIGHT] && my_x == CORE_W'(MESH_X - 1)) &&
    !(out_valid[P_TOP]   && my_y == 0) && !(out_valid[P_BOT]   && my_y == CORE_W'(MESH_Y - 1)));

endmodule
