// hbm_shared_model: behavioural model of one global memory shared by all
// cores, for testbenches (HBM is outside the design).
//
// Each core's HBM channel port of the top connects here, but all ports reach
// the same memory and together get one 16-byte line per cycle: every cycle,
// one port whose request was pending at the last edge is granted in
// round-robin order (req_ready is registered, so a lone requester is served
// every cycle). A read returns on the requesting port LAT cycles after it is
// accepted, in order, with its tag. Lines never written read as a pattern of
// their address. Writes are posted. This is the "synchronization through
// global memory" path that a broadcast without inter-core links must take.
module hbm_shared_model
  import vnpu_pkg::*;
#(
  parameter int N   = 8,
  parameter int LAT = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N-1:0]       req_valid,
  output logic [N-1:0]       req_ready,
  input  logic [N-1:0]       req_we,
  input  logic [PA_W-1:0]    req_addr  [N],
  input  logic [LINE_W-1:0]  req_wdata [N],
  input  logic [SPAD_AW-1:0] req_tag   [N],
  output logic [N-1:0]       rsp_valid,
  input  logic [N-1:0]       rsp_ready,
  output logic [SPAD_AW-1:0] rsp_tag   [N],
  output logic [LINE_W-1:0]  rsp_data  [N]
);
  logic [LINE_W-1:0] mem [longint];
  int n_reads = 0, n_writes = 0;

  function automatic logic [LINE_W-1:0] peek(input logic [PA_W-1:0] a);
    longint k;
    k = longint'(a >> 4);
    return mem.exists(k) ? mem[k] : {32'hC0DE0000 ^ 32'(a), 32'(a >> 4), ~32'(a), 32'(a) + 32'h1234};
  endfunction

  typedef struct {
    int due;
    logic [SPAD_AW-1:0] tag;
    logic [LINE_W-1:0] data;
  } pend_t;
  pend_t q [N][$];
  int cyc = 0, rr = 0;

  always @(posedge clk) begin
    int g;
    cyc <= cyc + 1;
    if (!rst_n) begin
      for (int i = 0; i < N; i++) q[i].delete();
      req_ready <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        if (rsp_valid[i] && rsp_ready[i]) void'(q[i].pop_front());
        if (req_valid[i] && req_ready[i]) begin
          if (req_we[i]) begin
            mem[longint'(req_addr[i] >> 4)] = req_wdata[i];
            n_writes++;
          end else begin
            q[i].push_back('{due: cyc + LAT, tag: req_tag[i], data: peek(req_addr[i])});
            n_reads++;
          end
        end
      end
      // grant the next cycle to one port that is still waiting
      g = -1;
      for (int k = 0; k < N; k++) begin
        int i;
        i = (rr + k) % N;
        if (g < 0 && req_valid[i] && !(req_ready[i])) g = i;
      end
      if (g < 0)
        for (int i = 0; i < N; i++) if (req_valid[i] && req_ready[i]) g = i;  // keep a lone streamer
      req_ready <= '0;
      if (g >= 0) begin
        req_ready[g] <= 1'b1;
        rr <= (g + 1) % N;
      end
    end
    for (int i = 0; i < N; i++) begin
      rsp_valid[i] <= rst_n && (q[i].size() > 0) && (q[i][0].due <= cyc + 1);
      rsp_tag[i]   <= (q[i].size() > 0) ? q[i][0].tag : '0;
      rsp_data[i]  <= (q[i].size() > 0) ? q[i][0].data : '0;
    end
  end
endmodule
