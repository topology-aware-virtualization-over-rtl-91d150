// tb_noc_vrouter: self-checking test of the send/receive engine.
//
// The weight SRAM and the routing table are modelled in the testbench.
// Checked: a SEND to a virtual core with a valid entry leaves as flits
// addressed to the physical core from the table, carrying the right VMID,
// source, data (lines spad, spad+step, ...) and last marker, one flit per
// cycle after a three-cycle start (a full 128-flit routing packet); random
// back-pressure loses or reorders nothing; a SEND to a virtual core outside
// the VM is refused with no flit sent; flits wait while no RECV is posted;
// a RECV writes its flits to spad, spad+step, ... and signals done.
module tb_noc_vrouter;
  import vnpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [CORE_W-1:0] my_id = 8'd5;
  logic [VMID_W-1:0] my_vmid = 4'd3;
  logic snd_valid = 0, snd_ready, snd_done, snd_fault;
  logic [SPAD_AW-1:0] snd_spad = '0, rcv_spad = '0;
  logic [LEN_W-1:0] snd_len = '0, snd_step = '0, rcv_len = '0, rcv_step = '0;
  logic [CORE_W-1:0] snd_dst_vcore = '0;
  logic rcv_valid = 0, rcv_ready, rcv_done;
  logic [6:0] rt_idx;
  noc_rt_entry_t rt_entry;
  logic sram_re, sram_we;
  logic [14:0] sram_raddr, sram_waddr;
  logic [LINE_W-1:0] sram_rdata, sram_wdata;
  logic inj_valid, inj_ready = 0, ej_valid = 0, ej_ready;
  flit_t inj_flit, ej_flit = '0;
  logic [31:0] n_sent, n_recv, n_refused;

  noc_vrouter dut (.*);

  noc_rt_entry_t rt_tab [128];
  assign rt_entry = rt_tab[rt_idx];
  logic [LINE_W-1:0] mem [32768];
  always_ff @(posedge clk) begin
    if (sram_re) sram_rdata <= mem[sram_raddr];
    if (sram_we) mem[sram_waddr] <= sram_wdata;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LINE_W-1:0] pat(input int a);
    return {32'(a) ^ 32'hA5A5_0000, 32'(a * 7), 32'(~a), 32'(a)};
  endfunction

  int rdone = 0;
  always @(negedge clk) if (rcv_done) rdone++;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // flit sink with optional random back-pressure
  int rx_n = 0, rx_bad = 0, rx_last_n = 0, first_cyc = 0, last_cyc = 0;
  int exp_spad, exp_step, exp_len, exp_pcore, exp_vcore;
  int bp_pct = 0;
  always @(posedge clk) begin
    if (rst_n && inj_valid && inj_ready) begin
      if (rx_n == 0) first_cyc = cyc;
      last_cyc = cyc;
      if (inj_flit.data != pat(exp_spad + rx_n * exp_step) ||
          int'(inj_flit.dst_pcore) != exp_pcore || int'(inj_flit.dst_vcore) != exp_vcore ||
          inj_flit.vmid != my_vmid || inj_flit.src_pcore != my_id ||
          inj_flit.last != (rx_n == exp_len - 1)) rx_bad++;
      if (inj_flit.last) rx_last_n++;
      rx_n++;
    end
  end
  always @(negedge clk) inj_ready = int'($urandom % 100) >= bp_pct;

  task automatic send(input int spad, input int len, input int step, input int vd, output int acc);
    @(negedge clk);
    snd_valid = 1; snd_spad = 16'(spad); snd_len = 16'(len); snd_step = 16'(step);
    snd_dst_vcore = 8'(vd);
    @(posedge clk);
    acc = cyc;
    #1 snd_valid = 0;
  endtask

  initial begin
    int acc, t0, nref;
    for (int i = 0; i < 128; i++) rt_tab[i] = '0;
    rt_tab[0] = '{valid: 1'b1, pcore: 8'd5, dir: DIR_NULL};
    rt_tab[1] = '{valid: 1'b1, pcore: 8'd2, dir: DIR_TOP};
    rt_tab[2] = '{valid: 1'b1, pcore: 8'd7, dir: DIR_NULL};
    for (int i = 0; i < 32768; i++) mem[i] = pat(i);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1) one routing packet (128 flits) at full rate
    exp_spad = 100; exp_step = 1; exp_len = 128; exp_pcore = 2; exp_vcore = 1;
    send(100, 128, 1, 1, acc);
    wait (snd_done);
    @(negedge clk);
    check(rx_n == 128 && rx_bad == 0 && rx_last_n == 1, $sformatf("packet: %0d flits, %0d bad", rx_n, rx_bad));
    check(first_cyc == acc + 3, $sformatf("first flit %0d cycles after accept", first_cyc - acc));
    check(last_cyc - first_cyc == 127, $sformatf("128 flits took %0d cycles", last_cyc - first_cyc + 1));
    check(n_sent == 128, "n_sent");

    // 2) strided send under back-pressure
    rx_n = 0; rx_bad = 0; rx_last_n = 0;
    exp_spad = 3000; exp_step = 5; exp_len = 300; exp_pcore = 7; exp_vcore = 2;
    bp_pct = 40;
    send(3000, 300, 5, 2, acc);
    wait (snd_done);
    @(negedge clk);
    bp_pct = 0;
    check(rx_n == 300 && rx_bad == 0 && rx_last_n == 1, $sformatf("strided: %0d flits, %0d bad", rx_n, rx_bad));

    // 3) destination outside the VM: refused, nothing sent
    rx_n = 0;
    nref = int'(n_refused);
    send(0, 10, 1, 9, acc);
    #1;
    check(snd_fault && snd_done, "refusal signalled with done");
    repeat (10) @(negedge clk);
    check(rx_n == 0, "refused send emits nothing");
    check(int'(n_refused) == nref + 1, "refusal counted");

    // 4) receive: flits wait without a posted RECV
    @(negedge clk);
    ej_valid = 1;
    ej_flit = '0;
    ej_flit.data = 128'hDEAD_0000;
    repeat (5) begin
      @(negedge clk);
      check(!ej_ready, "no RECV posted: flit held back");
    end
    rcv_valid = 1; rcv_spad = 16'd20000; rcv_len = 16'd50; rcv_step = 16'd3;
    @(posedge clk);
    #1 rcv_valid = 0;
    t0 = 0;
    while (t0 < 50) begin
      bit fire;
      @(negedge clk);
      ej_flit.data = (t0 == 0) ? 128'hDEAD_0000 : 128'(t0) << 4;
      fire = ej_ready;
      @(posedge clk);
      if (fire) t0++;
    end
    @(negedge clk);
    ej_valid = 0;
    @(negedge clk);
    check(n_recv == 50, $sformatf("received %0d", n_recv));
    check(rdone == 1, "one receive done");
    begin
      int bad = 0;
      check(mem[20000] == 128'hDEAD_0000, "first received line");
      for (int i = 1; i < 50; i++) if (mem[20000 + 3 * i] != (128'(i) << 4)) bad++;
      check(bad == 0, $sformatf("received lines wrong: %0d", bad));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
