// vnpu_pkg: types and constants shared by the virtualised NPU.
//
// Field widths of the range translation table (RTT) entry follow the paper:
// VA 48, PA 48, Size 32, Perm 4, Last_V 8 bits. The 2048-byte routing packet
// is 128 flits of 128 bits (one scratchpad line per flit). Everything else
// here (core-ID width, VMID width, instruction layout, direction encoding,
// permission bit order) is this design's own choice.
//
// Core IDs are 0-based and row-major over the physical mesh
// (pcore = y*MESH_X + x); the paper's figures number cores from 1.
package vnpu_pkg;

  localparam int unsigned CORE_W  = 8;    // core-ID width (up to 256 cores)
  localparam int unsigned VMID_W  = 4;    // up to 16 virtual NPUs
  localparam int unsigned VA_W    = 48;   // RTT virtual address
  localparam int unsigned PA_W    = 48;   // RTT physical address
  localparam int unsigned RSIZE_W = 32;   // RTT range size in bytes
  localparam int unsigned PERM_W  = 4;    // RTT permission bits
  localparam int unsigned LASTV_W = 8;    // RTT last_v index
  localparam int unsigned LINE_W  = 128;  // scratchpad line and flit payload
  localparam int unsigned LINE_BYTES = LINE_W / 8;
  localparam int unsigned SPAD_AW = 16;   // line address field in instructions
  localparam int unsigned LEN_W   = 16;   // line count field in instructions
  localparam int unsigned META_W  = 144;  // meta-zone word = range-TLB entry width

  // last_v value meaning "not recorded"
  localparam logic [LASTV_W-1:0] LASTV_NULL = '1;

  // Permission bits inside Perm(4)
  localparam int unsigned PERM_R = 0;
  localparam int unsigned PERM_W_BIT = 1;
  localparam int unsigned PERM_X = 2;

  // Output direction of a mesh router; DIR_NULL in a routing-table entry
  // means "no predefined direction: use dimension-order routing".
  typedef enum logic [2:0] {
    DIR_NULL   = 3'd0,
    DIR_LEFT   = 3'd1,   // x-1
    DIR_RIGHT  = 3'd2,   // x+1
    DIR_TOP    = 3'd3,   // y-1
    DIR_BOTTOM = 3'd4,   // y+1
    DIR_LOCAL  = 3'd5
  } dir_e;

  // Router port indices
  localparam int unsigned P_LOCAL = 0;
  localparam int unsigned P_LEFT  = 1;
  localparam int unsigned P_RIGHT = 2;
  localparam int unsigned P_TOP   = 3;
  localparam int unsigned P_BOT   = 4;
  localparam int unsigned NPORTS  = 5;

  // One RTT entry (140 bits, held in a 144-bit meta-zone word).
  typedef struct packed {
    logic [VA_W-1:0]    va;
    logic [PA_W-1:0]    pa;
    logic [RSIZE_W-1:0] size;
    logic [PERM_W-1:0]  perm;
    logic [LASTV_W-1:0] last_v;
  } rtt_entry_t;

  // One entry of a core's NoC routing table (indexed by v_CoreID).
  typedef struct packed {
    logic              valid;
    logic [CORE_W-1:0] pcore;
    dir_e              dir;
  } noc_rt_entry_t;

  // Controller routing-table root, one per VMID.
  typedef enum logic {RT_STANDARD = 1'b0, RT_MESH = 1'b1} rt_type_e;
  typedef struct packed {
    logic              valid;
    rt_type_e          rtype;
    logic [CORE_W-1:0] count;   // number of entries (standard) / unused (mesh)
    logic [CORE_W-1:0] base;    // first entry in the RT SRAM
  } rt_root_t;

  // Controller routing-table SRAM entry. Standard: a=v_core, b=p_core.
  // 2D mesh: a=first v_core, b=first p_core, c=shape x, d=shape y.
  typedef struct packed {
    logic [CORE_W-1:0] a;
    logic [CORE_W-1:0] b;
    logic [CORE_W-1:0] c;
    logic [CORE_W-1:0] d;
  } rt_sram_entry_t;

  typedef enum logic [2:0] {
    OP_NOP       = 3'd0,
    OP_DMA_LOAD  = 3'd1,   // HBM -> weight SRAM
    OP_DMA_STORE = 3'd2,   // weight SRAM -> HBM
    OP_SEND      = 3'd3,   // weight SRAM -> NoC (virtual destination core)
    OP_RECV      = 3'd4    // NoC -> weight SRAM
  } opcode_e;

  // NPU instruction as issued by a guest; core is a virtual core ID until
  // the instruction vRouter rewrites it.
  typedef struct packed {
    opcode_e             op;
    logic [CORE_W-1:0]   core;      // target core
    logic [SPAD_AW-1:0]  spad;      // weight-SRAM line address
    logic [LEN_W-1:0]    len;       // number of lines
    logic [LEN_W-1:0]    step;      // line stride (SEND/RECV)
    logic [VA_W-1:0]     va;        // global virtual byte address (DMA)
    logic [CORE_W-1:0]   dst_vcore; // SEND destination (virtual)
  } npu_inst_t;

  // NoC flit. Each flit carries its own routing information so that
  // flits of one packet follow the same deterministic path in order.
  typedef struct packed {
    logic [VMID_W-1:0] vmid;
    logic [CORE_W-1:0] dst_vcore;
    logic [CORE_W-1:0] dst_pcore;
    logic [CORE_W-1:0] src_pcore;
    logic              last;
    logic [LINE_W-1:0] data;
  } flit_t;

  // Hyper registers of one core (h-REG), written only by the hyper-mode
  // controller: the core's VMID, where its NoC routing table starts in the
  // meta-zone and how many virtual cores it has, the RTT bounds, and the
  // memory-access limit.
  typedef struct packed {
    logic [VMID_W-1:0]  vmid;
    logic [CORE_W-1:0]  rt_base;
    logic [CORE_W-1:0]  rt_count;
    logic [LASTV_W-1:0] rtt_base;
    logic [LASTV_W-1:0] rtt_end;
    logic [15:0]        rate_limit;  // max HBM beats per window, 0 = unlimited
  } hreg_t;

  // Configuration write targets inside a tile
  typedef enum logic [1:0] {
    TCFG_HREG = 2'd0,
    TCFG_RT   = 2'd1,
    TCFG_RTT  = 2'd2
  } tile_cfg_sel_e;

  // Configuration write targets inside the controller
  typedef enum logic [2:0] {
    CFG_RT_ROOT = 3'd0,
    CFG_RT_SRAM = 3'd1,
    CFG_HREG    = 3'd2,
    CFG_CORE_RT = 3'd3,
    CFG_RTT     = 3'd4
  } cfg_region_e;

  typedef struct packed {
    cfg_region_e        region;
    logic [CORE_W-1:0]  core;    // physical core for tile regions
    logic [CORE_W-1:0]  index;   // VMID, RT index or RTT index
  } cfg_addr_t;

endpackage
