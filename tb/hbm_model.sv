// hbm_model: behavioural model of an HBM channel for testbenches (not
// synthesizable logic of the design; HBM itself is outside it).
//
// Accepts a request when req_ready (random back-pressure, ready_pct percent
// of cycles); reads return
// after LAT cycles, in order, with the request's tag. Memory is a sparse
// array of 16-byte lines; a line never written reads as a pattern of its
// own address, so tests can predict it. Writes are posted.
module hbm_model
  import vnpu_pkg::*;
#(
  parameter int LAT = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_we,
  input  logic [PA_W-1:0]    req_addr,
  input  logic [LINE_W-1:0]  req_wdata,
  input  logic [SPAD_AW-1:0] req_tag,
  output logic               rsp_valid,
  input  logic               rsp_ready,
  output logic [SPAD_AW-1:0] rsp_tag,
  output logic [LINE_W-1:0]  rsp_data
);
  logic [LINE_W-1:0] mem [longint];
  int n_reads = 0, n_writes = 0;
  int ready_pct = 80;   // tests may change this

  function automatic logic [LINE_W-1:0] pattern(input logic [PA_W-1:0] a);
    return {32'hC0DE0000 ^ 32'(a), 32'(a >> 4), ~32'(a), 32'(a) + 32'h1234};
  endfunction
  function automatic logic [LINE_W-1:0] peek(input logic [PA_W-1:0] a);
    longint k;
    k = longint'(a >> 4);
    return mem.exists(k) ? mem[k] : pattern({a[PA_W-1:4], 4'b0});
  endfunction

  typedef struct {
    int due;
    logic [SPAD_AW-1:0] tag;
    logic [LINE_W-1:0] data;
  } pend_t;
  pend_t q[$];
  int cyc = 0;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    req_ready <= rst_n && (int'($urandom % 100) < ready_pct);
  end

  // The queue is private to this block; outputs change only through
  // non-blocking assignments so that every reader samples them race-free.
  always @(posedge clk) begin
    if (!rst_n) begin
      q.delete();
    end else begin
      if (rsp_valid && rsp_ready) void'(q.pop_front());
      if (req_valid && req_ready) begin
        if (req_we) begin
          mem[longint'(req_addr >> 4)] = req_wdata;
          n_writes++;
        end else begin
          q.push_back('{due: cyc + LAT, tag: req_tag, data: peek(req_addr)});
          n_reads++;
        end
      end
    end
    rsp_valid <= rst_n && (q.size() > 0) && (q[0].due <= cyc + 1);
    rsp_tag   <= (q.size() > 0) ? q[0].tag : '0;
    rsp_data  <= (q.size() > 0) ? q[0].data : '0;
  end
endmodule
