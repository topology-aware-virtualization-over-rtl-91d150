// access_counter: per-core global-memory access counter and rate limiter.
//
// The paper gives each core an access counter that tracks its memory
// accesses in a monitored time window, and lets the NPU controller cap the
// memory bandwidth of each virtual NPU. Here a window is WINDOW cycles long;
// every accepted HBM request (beat) increments the count. While the count
// has reached limit (a hyper register; 0 means no limit) allow is low and
// the DMA engine holds its next request until the window ends. The count of
// the previous window is kept in last_count for the controller to read.
//
// Timing: allow is combinational from the current count and limit; the
// count restarts at the clock edge that ends a window. The window length and
// the meaning of limit 0 are this design's own.
module access_counter #(
  parameter int unsigned WINDOW = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] limit,
  input  logic        beat,
  output logic        allow,
  output logic [15:0] count,
  output logic [15:0] last_count,
  output logic [31:0] n_throttled
);
  logic [$clog2(WINDOW)-1:0] t;
  wire win_end = (t == $clog2(WINDOW)'(WINDOW - 1));

  assign allow = (limit == '0) || (count < limit);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t           <= '0;
      count       <= '0;
      last_count  <= '0;
      n_throttled <= '0;
    end else begin
      t <= win_end ? '0 : t + 1'b1;
      if (win_end) begin
        last_count <= count + 16'(beat);
        count      <= '0;
      end else if (beat && count != '1) begin
        count <= count + 1'b1;
      end
      if (!allow) n_throttled <= n_throttled + 1;
    end
  end

  // A request is never accepted while the limit is reached.
  a_no_beat_when_blocked: assert property (@(posedge clk) disable iff (!rst_n) !(beat && !allow));
endmodule
