// tb_inst_vrouter: self-checking test of the instruction vRouter.
//
// Sets up the two routing tables of the paper's instruction-router example
// on a 3x3 mesh (0-based IDs): VM1 standard table v0->p0, v1->p1, v2->p3,
// v3->p4; VM2 2D-mesh table starting at p1 with shape 2x2. Random
// instructions from both VMs are checked against a reference translation
// written here, including rejected out-of-range cores, and the latency
// (3 cycles for a table lookup, 1 cycle when the previous translation is
// reused) is checked for every instruction.
module tb_inst_vrouter;
  import vnpu_pkg::*;

  localparam int unsigned MX = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic root_we = 0, sram_we = 0;
  logic [VMID_W-1:0] root_idx = '0;
  rt_root_t root_wdata = '0;
  logic [6:0] sram_idx = '0;
  rt_sram_entry_t sram_wdata = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, fault;
  logic [VMID_W-1:0] in_vmid = '0, out_vmid, fault_vmid;
  npu_inst_t in_inst = '0, out_inst;
  logic [CORE_W-1:0] fault_vcore;
  logic [31:0] n_lookups, n_reuse;

  inst_vrouter #(.RT_ENTRIES(128), .NUM_VM(16), .MESH_X(MX)) dut (.*);

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

  // reference model
  function automatic int ref_tr(input int vm, input int v);
    int std_map[4] = '{0, 1, 3, 4};
    if (vm == 1) return (v < 4) ? std_map[v] : -1;
    if (vm == 2) return (v < 4) ? 1 + (v / 2) * MX + (v % 2) : -1;
    return -1;
  endfunction

  task automatic wr_root(input int vm, input rt_root_t r);
    @(negedge clk); root_we = 1; root_idx = VMID_W'(vm); root_wdata = r;
    @(negedge clk); root_we = 0;
  endtask
  task automatic wr_sram(input int i, input rt_sram_entry_t e);
    @(negedge clk); sram_we = 1; sram_idx = 7'(i); sram_wdata = e;
    @(negedge clk); sram_we = 0;
  endtask

  int prev_vm = -1, prev_v = -1;
  task automatic issue(input int vm, input int v);
    int lat, exp;
    bit got_fault;
    bit reuse;
    exp = ref_tr(vm, v);
    reuse = (vm == prev_vm && v == prev_v);
    @(negedge clk);
    in_valid = 1; in_vmid = VMID_W'(vm);
    in_inst = '0; in_inst.op = OP_SEND; in_inst.core = CORE_W'(v);
    in_inst.spad = 16'($urandom);
    @(posedge clk); // accepted here (in_ready was high)
    #1 in_valid = 0;
    got_fault = 0;
    lat = 0;
    // latency = clock edges from acceptance to the edge that takes the output
    for (int k = 1; k < 10; k++) begin
      @(negedge clk);
      lat = k;
      if (out_valid || fault) break;
    end
    if (exp < 0) begin
      check(fault && !out_valid && fault_vcore == CORE_W'(v) && fault_vmid == VMID_W'(vm),
            $sformatf("vm%0d v%0d should fault", vm, v));
      check(lat == 3, "fault latency");
    end else begin
      check(out_valid && out_inst.core == CORE_W'(exp) && out_vmid == VMID_W'(vm) &&
            out_inst.spad == in_inst.spad,
            $sformatf("vm%0d v%0d -> p%0d expected p%0d", vm, v, out_inst.core, exp));
      check(lat == (reuse ? 1 : 3), $sformatf("latency %0d reuse=%0d", lat, reuse));
      prev_vm = vm; prev_v = v;
    end
    @(posedge clk);
    #1;
  endtask

  initial begin
    rt_root_t r;
    rt_sram_entry_t e;
    int std_map[4] = '{0, 1, 3, 4};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // VM1: standard table, 4 entries from SRAM index 10
    r = '{valid: 1'b1, rtype: RT_STANDARD, count: 8'd4, base: 8'd10};
    wr_root(1, r);
    for (int i = 0; i < 4; i++) begin
      e = '{a: CORE_W'(i), b: CORE_W'(std_map[i]), c: '0, d: '0};
      wr_sram(10 + i, e);
    end
    // VM2: 2D mesh table, 1 entry at SRAM index 40
    r = '{valid: 1'b1, rtype: RT_MESH, count: 8'd1, base: 8'd40};
    wr_root(2, r);
    e = '{a: 8'd0, b: 8'd1, c: 8'd2, d: 8'd2};
    wr_sram(40, e);
    prev_vm = -1;
    // directed: reuse then lookup
    issue(1, 2); issue(1, 2); issue(1, 3); issue(2, 3); issue(2, 3);
    issue(3, 0);            // VM3 has no table
    issue(1, 5);            // out of VM1's table
    for (int n = 0; n < 300; n++) issue(1 + int'($urandom % 2), int'($urandom % 6));
    // a table write drops the kept translation
    issue(1, 1);
    wr_sram(11, '{a: 8'd1, b: 8'd1, c: 8'd0, d: 8'd0});
    prev_vm = -1;
    issue(1, 1);
    check(n_reuse > 0 && n_lookups > 0, "statistics count");
    $display("reuse=%0d lookups=%0d", n_reuse, n_lookups);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
