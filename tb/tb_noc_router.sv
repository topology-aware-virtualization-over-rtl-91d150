// tb_noc_router: self-checking test of the mesh router and its
// direction override, on a 4x3 mesh of routers (cores 0..11, row-major).
//
// The paper's NoC example is rebuilt with 0-based IDs: vNPU2 (VMID 2) owns
// cores 2,3,6,7 and 11, with virtual core 4 on core 11 and virtual core 2 on
// core 6. A packet from v4 to v2 under dimension-order routing passes core
// 10, which belongs to no vNPU2 core (NoC interference). With the direction
// TOP predefined in core 11's routing table for v2, the packet goes through
// core 7 instead. The test checks both paths, the hop latency, and then
// random all-to-all traffic for delivery, data and per-source order.
module tb_noc_router;
  import vnpu_pkg::*;

  localparam int MX = 4, MY = 3, N = MX * MY;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NPORTS-1:0] i_val [N], i_rdy [N], o_val [N], o_rdy [N];
  flit_t i_flit [N][NPORTS], o_flit [N][NPORTS];
  logic [6:0] rt_idx [N][NPORTS];
  noc_rt_entry_t rt_entry [N][NPORTS];
  noc_rt_entry_t rt_tab [N][128];
  logic [VMID_W-1:0] vmid_of [N];
  logic [31:0] n_ov [N], n_dor [N];

  // local injection and ejection driven by the test
  logic  inj_val [N];
  flit_t inj_flit [N];
  logic  ej_rdy [N];

  for (genvar n = 0; n < N; n++) begin : g_node
    localparam int X = n % MX, Y = n / MX;
    noc_router #(.MESH_X(MX), .MESH_Y(MY), .RT_ENTRIES(128)) u_r (
      .clk, .rst_n, .my_id(CORE_W'(n)), .my_vmid(vmid_of[n]),
      .in_valid(i_val[n]), .in_ready(i_rdy[n]), .in_flit(i_flit[n]),
      .out_valid(o_val[n]), .out_ready(o_rdy[n]), .out_flit(o_flit[n]),
      .rt_idx(rt_idx[n]), .rt_entry(rt_entry[n]),
      .n_override(n_ov[n]), .n_dor(n_dor[n]));
    for (genvar p = 0; p < NPORTS; p++) begin : g_rt
      assign rt_entry[n][p] = rt_tab[n][rt_idx[n][p]];
    end
    assign i_val[n][P_LOCAL]  = inj_val[n];
    assign i_flit[n][P_LOCAL] = inj_flit[n];
    assign o_rdy[n][P_LOCAL]  = ej_rdy[n];
    if (X > 0) begin : g_l
      assign i_val[n][P_LEFT] = o_val[n-1][P_RIGHT];  assign i_flit[n][P_LEFT] = o_flit[n-1][P_RIGHT];
      assign o_rdy[n][P_LEFT] = i_rdy[n-1][P_RIGHT];
    end else begin : g_nl
      assign i_val[n][P_LEFT] = 1'b0; assign i_flit[n][P_LEFT] = '0; assign o_rdy[n][P_LEFT] = 1'b0;
    end
    if (X < MX - 1) begin : g_r
      assign i_val[n][P_RIGHT] = o_val[n+1][P_LEFT];  assign i_flit[n][P_RIGHT] = o_flit[n+1][P_LEFT];
      assign o_rdy[n][P_RIGHT] = i_rdy[n+1][P_LEFT];
    end else begin : g_nr
      assign i_val[n][P_RIGHT] = 1'b0; assign i_flit[n][P_RIGHT] = '0; assign o_rdy[n][P_RIGHT] = 1'b0;
    end
    if (Y > 0) begin : g_t
      assign i_val[n][P_TOP] = o_val[n-MX][P_BOT];  assign i_flit[n][P_TOP] = o_flit[n-MX][P_BOT];
      assign o_rdy[n][P_TOP] = i_rdy[n-MX][P_BOT];
    end else begin : g_nt
      assign i_val[n][P_TOP] = 1'b0; assign i_flit[n][P_TOP] = '0; assign o_rdy[n][P_TOP] = 1'b0;
    end
    if (Y < MY - 1) begin : g_b
      assign i_val[n][P_BOT] = o_val[n+MX][P_TOP];  assign i_flit[n][P_BOT] = o_flit[n+MX][P_TOP];
      assign o_rdy[n][P_BOT] = i_rdy[n+MX][P_TOP];
    end else begin : g_nb
      assign i_val[n][P_BOT] = 1'b0; assign i_flit[n][P_BOT] = '0; assign o_rdy[n][P_BOT] = 1'b0;
    end
  end

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

  // cycle counter and ejection log
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int rx_cnt [N];
  int rx_last_cyc [N];
  int exp_seq [N][N];   // next expected sequence number per (dst, src)
  int seq_err = 0, dst_err = 0;
  always @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      if (rst_n && o_val[n][P_LOCAL] && ej_rdy[n]) begin
        flit_t f;
        f = o_flit[n][P_LOCAL];
        rx_cnt[n] <= rx_cnt[n] + 1;
        rx_last_cyc[n] <= cyc;
        if (f.dst_pcore != CORE_W'(n)) dst_err++;
        if (f.data[31:0] != 32'(exp_seq[n][4'(f.src_pcore)])) seq_err++;
        exp_seq[n][4'(f.src_pcore)] = exp_seq[n][4'(f.src_pcore)] + 1;
      end
    end
  end

  int tx_seq [N][N];
  task automatic send_flit(input int s, input int d, input int vm, input int vd);
    @(negedge clk);
    inj_val[s] = 1;
    inj_flit[s] = '0;
    inj_flit[s].vmid = VMID_W'(vm);
    inj_flit[s].dst_vcore = CORE_W'(vd);
    inj_flit[s].dst_pcore = CORE_W'(d);
    inj_flit[s].src_pcore = CORE_W'(s);
    inj_flit[s].data[31:0] = 32'(tx_seq[d][s]);
    inj_flit[s].data[127:96] = $urandom;
    while (1) begin
      @(posedge clk);
      if (i_rdy[s][P_LOCAL]) break;
    end
    tx_seq[d][s]++;
    #1 inj_val[s] = 0;
  endtask

  int vm2_cores[5] = '{2, 3, 6, 7, 11};
  initial begin
    int c_inj, ov0, dor10, dor7;
    for (int n = 0; n < N; n++) begin
      inj_val[n] = 0; inj_flit[n] = '0; ej_rdy[n] = 1; rx_cnt[n] = 0;
      vmid_of[n] = '0;
      for (int k = 0; k < 128; k++) rt_tab[n][k] = '0;
      for (int k = 0; k < N; k++) begin exp_seq[n][k] = 0; tx_seq[n][k] = 0; end
    end
    foreach (vm2_cores[i]) begin
      vmid_of[vm2_cores[i]] = 4'd2;
      for (int j = 0; j < 5; j++)
        rt_tab[vm2_cores[i]][j] = '{valid: 1'b1, pcore: CORE_W'(vm2_cores[j]), dir: DIR_NULL};
    end
    vmid_of[0] = 1; vmid_of[1] = 1; vmid_of[4] = 1; vmid_of[5] = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1) dimension-order routing: v4 (core 11) -> v2 (core 6) crosses core 10
    dor10 = int'(n_dor[10]);
    c_inj = cyc;
    send_flit(11, 6, 2, 2);
    wait (rx_cnt[6] == 1);
    @(negedge clk);
    check(int'(n_dor[10]) == dor10 + 1, "DOR path passes core 10 (interference)");
    // send_flit injects at edge c_inj+1; 2 hops; the flit leaves the
    // destination 3 edges after injection
    check(rx_last_cyc[6] == c_inj + 1 + 3, $sformatf("hop latency %0d", rx_last_cyc[6] - c_inj - 1));

    // 2) predefined direction at core 11: TOP for v2; packet stays in vNPU2
    rt_tab[11][2].dir = DIR_TOP;
    dor10 = int'(n_dor[10]);
    dor7  = int'(n_dor[7]);
    ov0   = int'(n_ov[11]);
    for (int k = 0; k < 8; k++) send_flit(11, 6, 2, 2);
    wait (rx_cnt[6] == 9);
    @(negedge clk);
    check(int'(n_dor[10]) == dor10, "override keeps packets off core 10");
    check(int'(n_ov[11]) == ov0 + 8, "override used at core 11");
    check(int'(n_dor[7]) == dor7 + 8, "packets pass core 7");
    // a flit of another VM ignores core 11's table
    send_flit(11, 6, 3, 2);
    wait (rx_cnt[6] == 10);
    @(negedge clk);
    check(int'(n_dor[10]) == dor10 + 1, "other VM uses dimension order");

    // 3) random traffic with random ejection back-pressure
    rt_tab[11][2].dir = DIR_NULL;
    fork
      begin
        for (int t = 0; t < 3000; t++) begin
          @(negedge clk);
          for (int n = 0; n < N; n++) ej_rdy[n] = ($urandom % 4) != 0;
        end
        for (int n = 0; n < N; n++) ej_rdy[n] = 1;
      end
      for (int s0 = 0; s0 < N; s0++) begin
        fork
          automatic int s = s0;
          for (int k = 0; k < 60; k++) send_flit(s, int'($urandom % N), 0, 0);
        join_none
      end
    join_any
    wait fork;
    repeat (200) @(posedge clk);
    begin
      int tot_tx, tot_rx;
      tot_tx = 0; tot_rx = 0;
      for (int n = 0; n < N; n++) begin
        tot_rx += rx_cnt[n];
        for (int s = 0; s < N; s++) tot_tx += tx_seq[n][s];
      end
      check(tot_rx == tot_tx, $sformatf("delivered %0d of %0d", tot_rx, tot_tx));
    end
    check(seq_err == 0, $sformatf("order/data errors %0d", seq_err));
    check(dst_err == 0, $sformatf("misdelivered %0d", dst_err));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
