// tb_dma_engine: self-checking test of the DMA engine.
//
// Around the engine: the HBM model, a weight-SRAM model whose ports are
// granted at random, a translation model (VA window 0x100000..0x140000 maps
// to PA + 0x3000000 with random extra miss cycles; the upper half is
// read-only), and an access-rate model that blocks requests at random.
// Checked: loaded SRAM lines equal the HBM contents at the translated
// addresses; stored lines appear in HBM; a load runs at one request per
// cycle when nothing stalls it; no request while blocked; a command that
// leaves the window or writes a read-only range faults.
module tb_dma_engine;
  import vnpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, cmd_store = 0, done, fault;
  logic [VA_W-1:0] cmd_va = '0;
  logic [SPAD_AW-1:0] cmd_spad = '0;
  logic [LEN_W-1:0] cmd_len = '0;
  logic xl_valid, xl_write, xl_hit, xl_fault;
  logic [VA_W-1:0] xl_va;
  logic [PA_W-1:0] xl_pa;
  logic allow, beat;
  logic hbm_req_valid, hbm_req_ready, hbm_req_we, hbm_rsp_valid, hbm_rsp_ready;
  logic [PA_W-1:0] hbm_req_addr;
  logic [LINE_W-1:0] hbm_req_wdata, hbm_rsp_data;
  logic [SPAD_AW-1:0] hbm_req_tag, hbm_rsp_tag;
  logic sram_we, sram_wgnt, sram_re, sram_rgnt;
  logic [14:0] sram_waddr, sram_raddr;
  logic [LINE_W-1:0] sram_wdata, sram_rdata;

  dma_engine #(.SPAD_LINES(32768)) dut (.*);

  hbm_model #(.LAT(6)) hbm (.clk, .rst_n, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready),
    .req_we(hbm_req_we), .req_addr(hbm_req_addr), .req_wdata(hbm_req_wdata), .req_tag(hbm_req_tag),
    .rsp_valid(hbm_rsp_valid), .rsp_ready(hbm_rsp_ready), .rsp_tag(hbm_rsp_tag), .rsp_data(hbm_rsp_data));

  // translation model
  localparam logic [47:0] VA0 = 48'h100000, VSZ = 48'h40000, OFS = 48'h3000000;
  int stall_pct = 30, block_pct = 0, gnt_pct = 80;
  logic rnd_hit, rnd_allow, rnd_wg, rnd_rg;
  always_ff @(posedge clk) begin
    rnd_hit   <= int'($urandom % 100) >= stall_pct;
    rnd_allow <= int'($urandom % 100) >= block_pct;
    rnd_wg    <= int'($urandom % 100) < gnt_pct;
    rnd_rg    <= int'($urandom % 100) < gnt_pct;
  end
  wire mapped = xl_va >= VA0 && xl_va < VA0 + VSZ;
  wire ro     = xl_va >= VA0 + VSZ / 2;
  assign xl_hit   = xl_valid && mapped && !(xl_write && ro) && rnd_hit;
  assign xl_fault = xl_valid && (!mapped || (xl_write && ro));
  assign xl_pa    = xl_va + OFS;
  assign allow    = rnd_allow;
  assign sram_wgnt = rnd_wg;
  assign sram_rgnt = rnd_rg;

  // weight SRAM model
  logic [LINE_W-1:0] spad [32768];
  always_ff @(posedge clk) begin
    if (sram_we && sram_wgnt) spad[sram_waddr] <= sram_wdata;
    if (sram_re && sram_rgnt) sram_rdata <= spad[sram_raddr];
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int beat_blocked = 0, beats = 0;
  always @(posedge clk) if (rst_n) begin
    if (beat && !allow) beat_blocked++;
    if (beat) beats++;
  end

  task automatic run(input bit st, input logic [47:0] va, input int sp, input int len,
                     output bit flt, output int cycles);
    @(negedge clk);
    cmd_valid = 1; cmd_store = st; cmd_va = va; cmd_spad = 16'(sp); cmd_len = 16'(len);
    @(posedge clk); #1 cmd_valid = 0;
    cycles = 0;
    while (!done) begin @(posedge clk); #1; cycles++; end
    flt = fault;
  endtask

  initial begin
    bit flt;
    int cyc, b0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 32768; i++) spad[i] = '0;
    // random loads with stalls everywhere
    block_pct = 20;
    for (int n = 0; n < 20; n++) begin
      logic [47:0] va;
      int sp, len;
      va  = VA0 + 48'(($urandom % 1000) * 16);
      sp  = int'($urandom % 30000);
      len = 1 + int'($urandom % 200);
      run(0, va, sp, len, flt, cyc);
      check(!flt, "load completes without fault");
      for (int i = 0; i < len; i++)
        check(spad[sp + i] == hbm.peek(va + 48'(16 * i) + OFS), $sformatf("load line %0d", i));
    end
    // stores from random SRAM contents into the writable half
    for (int n = 0; n < 10; n++) begin
      logic [47:0] va;
      int sp, len;
      va  = VA0 + 48'(($urandom % 500) * 16);
      sp  = int'($urandom % 30000);
      len = 1 + int'($urandom % 60);
      for (int i = 0; i < len; i++) spad[sp + i] = {$urandom, $urandom, $urandom, $urandom};
      run(1, va, sp, len, flt, cyc);
      check(!flt, "store completes");
      for (int i = 0; i < len; i++)
        check(hbm.peek(va + 48'(16 * i) + OFS) == spad[sp + i], $sformatf("store line %0d", i));
    end
    check(beat_blocked == 0, "no request while the rate limit blocks");
    // full-rate load: nothing stalls
    stall_pct = 0; block_pct = 0; gnt_pct = 100; hbm.ready_pct = 100;
    repeat (3) @(posedge clk);
    b0 = beats;
    run(0, VA0, 100, 128, flt, cyc);
    // 128 requests, one per cycle, plus the HBM latency to drain
    check(beats - b0 == 128 && cyc <= 128 + 6 + 3, $sformatf("full-rate load took %0d cycles", cyc));
    // faults: leave the window; write read-only half
    stall_pct = 20; hbm.ready_pct = 80; gnt_pct = 80;
    run(0, VA0 + VSZ - 48'h40, 0, 10, flt, cyc);
    check(flt, "load past the mapped window faults");
    run(1, VA0 + VSZ / 2, 0, 4, flt, cyc);
    check(flt, "store to read-only range faults");
    // engine still works after a fault
    run(0, VA0, 500, 8, flt, cyc);
    check(!flt && spad[507] == hbm.peek(VA0 + 48'h70 + OFS), "load after fault");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
