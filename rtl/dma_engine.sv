// dma_engine: per-core DMA between HBM and the weight SRAM, with every
// address translated by vChunk and every request counted by the access
// counter.
//
// A command moves len consecutive 16-byte lines: line i is at virtual
// address va + 16*i and at weight-SRAM line spad + i.
//   * load (HBM -> SRAM): one translated read request per cycle while vChunk
//     hits, the rate limit allows and HBM is ready; responses (in order or
//     not: each carries its SRAM line as tag) are written into the SRAM.
//     The command ends when all responses are in.
//   * store (SRAM -> HBM): per line, translate, read the SRAM line, then
//     send a posted write request (four cycles or more per line).
// A vChunk fault (unmapped or no permission) aborts the command: no further
// request is sent, outstanding reads drain, and done and fault pulse together.
//
// Interfaces: cmd valid/ready; HBM request valid/ready with {we, addr, wdata,
// tag} and read responses {valid, tag, data} with rsp_ready; SRAM write
// and read requests that the tile grants (wgnt/rgnt) when no higher-priority
// user wants the port; read data arrives the cycle after a granted read.
// The paper gives the DMA engine's role; its command format and this
// pipeline are this design's own.
module dma_engine
  import vnpu_pkg::*;
#(
  parameter int unsigned SPAD_LINES = 32768
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // command
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  logic                          cmd_store,
  input  logic [VA_W-1:0]               cmd_va,
  input  logic [SPAD_AW-1:0]            cmd_spad,
  input  logic [LEN_W-1:0]              cmd_len,
  output logic                          done,
  output logic                          fault,
  // vChunk
  output logic                          xl_valid,
  output logic [VA_W-1:0]               xl_va,
  output logic                          xl_write,
  input  logic                          xl_hit,
  input  logic [PA_W-1:0]               xl_pa,
  input  logic                          xl_fault,
  // access counter
  input  logic                          allow,
  output logic                          beat,
  // HBM
  output logic                          hbm_req_valid,
  input  logic                          hbm_req_ready,
  output logic                          hbm_req_we,
  output logic [PA_W-1:0]               hbm_req_addr,
  output logic [LINE_W-1:0]             hbm_req_wdata,
  output logic [SPAD_AW-1:0]            hbm_req_tag,
  input  logic                          hbm_rsp_valid,
  output logic                          hbm_rsp_ready,
  input  logic [SPAD_AW-1:0]            hbm_rsp_tag,
  input  logic [LINE_W-1:0]             hbm_rsp_data,
  // weight SRAM
  output logic                          sram_we,
  output logic [$clog2(SPAD_LINES)-1:0] sram_waddr,
  output logic [LINE_W-1:0]             sram_wdata,
  input  logic                          sram_wgnt,
  output logic                          sram_re,
  output logic [$clog2(SPAD_LINES)-1:0] sram_raddr,
  input  logic                          sram_rgnt,
  input  logic [LINE_W-1:0]             sram_rdata
);
  localparam int unsigned SAW = $clog2(SPAD_LINES);

  typedef enum logic [2:0] {D_IDLE, D_LOAD, D_DRAIN, D_ST_XL, D_ST_RD, D_ST_LAT, D_ST_WR} dstate_e;
  dstate_e st;

  logic [VA_W-1:0]    va_q;
  logic [SPAD_AW-1:0] spad_q;
  logic [LEN_W-1:0]   len_q, issued, returned;
  logic               err_q;
  logic [PA_W-1:0]    pa_q;
  logic [LINE_W-1:0]  data_q;

  wire [VA_W-1:0] cur_va = va_q + VA_W'({issued, 4'b0000});

  assign cmd_ready = (st == D_IDLE);

  // translation request: load issues while lines remain; store per line
  assign xl_valid = (st == D_LOAD && issued != len_q) || (st == D_ST_XL);
  assign xl_va    = cur_va;
  assign xl_write = (st == D_ST_XL);

  wire load_go = (st == D_LOAD) && issued != len_q && xl_hit && allow;

  always_comb begin
    hbm_req_valid = 1'b0;
    hbm_req_we    = 1'b0;
    hbm_req_addr  = xl_pa;
    hbm_req_wdata = data_q;
    hbm_req_tag   = spad_q + SPAD_AW'(issued);
    if (load_go) begin
      hbm_req_valid = 1'b1;
    end else if (st == D_ST_WR) begin
      hbm_req_valid = allow;
      hbm_req_we    = 1'b1;
      hbm_req_addr  = pa_q;
    end
  end
  assign beat = hbm_req_valid && hbm_req_ready;

  // read responses go straight into the SRAM
  assign sram_we       = hbm_rsp_valid;
  assign sram_waddr    = SAW'(hbm_rsp_tag);
  assign sram_wdata    = hbm_rsp_data;
  assign hbm_rsp_ready = sram_wgnt;
  wire   rsp_take      = hbm_rsp_valid && sram_wgnt;

  assign sram_re    = (st == D_ST_RD);
  assign sram_raddr = SAW'(spad_q + SPAD_AW'(issued));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= D_IDLE;
      va_q     <= '0;
      spad_q   <= '0;
      len_q    <= '0;
      issued   <= '0;
      returned <= '0;
      err_q    <= 1'b0;
      pa_q     <= '0;
      data_q   <= '0;
      done     <= 1'b0;
      fault    <= 1'b0;
    end else begin
      done  <= 1'b0;
      fault <= 1'b0;
      if (rsp_take) returned <= returned + 1'b1;
      unique case (st)
        D_IDLE: if (cmd_valid) begin
          va_q     <= cmd_va;
          spad_q   <= cmd_spad;
          len_q    <= cmd_len;
          issued   <= '0;
          returned <= '0;
          err_q    <= 1'b0;
          if (cmd_len == '0) done <= 1'b1;
          else st <= cmd_store ? D_ST_XL : D_LOAD;
        end
        D_LOAD: begin
          if (load_go && hbm_req_ready) issued <= issued + 1'b1;
          if (xl_fault) begin
            err_q <= 1'b1;
            st    <= D_DRAIN;
          end else if (issued == len_q) begin
            st <= D_DRAIN;
          end
        end
        D_DRAIN: if (returned + LEN_W'(rsp_take) == issued) begin
          done  <= 1'b1;
          fault <= err_q;
          st    <= D_IDLE;
        end
        D_ST_XL: if (xl_fault) begin
          done  <= 1'b1;
          fault <= 1'b1;
          st    <= D_IDLE;
        end else if (xl_hit && allow) begin
          pa_q <= xl_pa;
          st   <= D_ST_RD;
        end
        D_ST_RD:  if (sram_rgnt) st <= D_ST_LAT;
        D_ST_LAT: begin
          data_q <= sram_rdata;
          st     <= D_ST_WR;
        end
        D_ST_WR: if (hbm_req_ready && allow) begin
          issued <= issued + 1'b1;
          if (issued + 1'b1 == len_q) begin
            done <= 1'b1;
            st   <= D_IDLE;
          end else begin
            st <= D_ST_XL;
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  a_hbm_stable: assert property (@(posedge clk) disable iff (!rst_n)
    hbm_req_valid && hbm_req_we && !hbm_req_ready |=> $stable(hbm_req_addr) && $stable(hbm_req_wdata));
endmodule
