// tb_weight_sram: self-checking test of the weight-zone SRAM at its full
// 512 KB size: random writes and reads over the whole address range against
// a reference copy, read latency of one cycle, and read-before-write when
// both ports hit the same line.
module tb_weight_sram;
  import vnpu_pkg::*;
  localparam int L = 32768;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [14:0] waddr = '0, raddr = '0;
  logic [LINE_W-1:0] wdata = '0, rdata;
  weight_sram #(.LINES(L)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [LINE_W-1:0] ref_mem [int];
  initial begin
    logic [LINE_W-1:0] old;
    // write a few thousand random lines, including both ends
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      we = 1;
      waddr = (n == 0) ? 15'd0 : (n == 1) ? 15'(L - 1) : 15'($urandom);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      ref_mem[int'(waddr)] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (ref_mem[a]) begin
      @(negedge clk); re = 1; raddr = 15'(a);
      @(negedge clk); re = 0;
      check(rdata == ref_mem[a], $sformatf("line %0d", a));
    end
    // same-line write and read: old data returned, new data stored
    @(negedge clk);
    raddr = 15'd0; re = 1; we = 1; waddr = 15'd0; wdata = '1;
    old = ref_mem[0];
    @(negedge clk); re = 0; we = 0;
    check(rdata == old, "read-before-write");
    @(negedge clk); re = 1;
    @(negedge clk); re = 0;
    check(rdata == '1, "write stored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
