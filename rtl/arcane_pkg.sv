// arcane_pkg: sizes, bus types, address map and encodings shared by the
// ARCANE last-level cache. The default geometry is the 4-VPU, 4-lane
// configuration: 4 VPUs of 32 KiB each, 1 KiB vector registers that double as
// 1 KiB cache lines, hence 32 registers per VPU and 128 lines in total.
// Bus width (32 bit), the request/response bus style, the address map of the
// controller registers and the vector instruction encoding are choices of this
// design; the paper leaves them open.
package arcane_pkg;


  localparam int unsigned CFG_NUM_VPU    = 4;
  localparam int unsigned CFG_LANES      = 4;
  localparam int unsigned CFG_VRF_BYTES  = 32768;
  localparam int unsigned LINE_BYTES = 1024;
  localparam int unsigned LINE_WORDS = LINE_BYTES / 4;
  localparam int unsigned CFG_VREGS      = CFG_VRF_BYTES / LINE_BYTES;
  localparam int unsigned CFG_LINES      = CFG_NUM_VPU * CFG_VREGS;
  localparam int unsigned CFG_AT_ENTRIES = 16;
  localparam int unsigned CFG_EMEM_BYTES = 16384;

  // Simple request/grant/read-valid bus (OBI-like). A request is accepted in
  // the cycle where req and gnt are both high; read data follow with rvalid
  // one or more cycles later, in order.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } bus_rsp_t;

  // Window through which the SW DMA addresses VPU vector registers directly:
  // byte address VRF_BASE + line*LINE_BYTES + offset, line = vpu*CFG_VREGS + vreg.
  localparam logic [31:0] VRF_BASE = 32'hF000_0000;
  localparam logic [31:0] VRF_MASK = 32'hFFFE_0000;  // 128 KiB window

  // Controller bus address map (eCPU data port and host configuration port).
  localparam logic [31:0] EMEM_BASE   = 32'h0000_0000;
  localparam logic [31:0] BRIDGE_BASE = 32'h0001_0000;
  localparam logic [31:0] CFG_BASE    = 32'h0001_0100;
  localparam logic [31:0] AT_BASE     = 32'h0001_0200;
  localparam logic [31:0] SWDMA_BASE  = 32'h0001_0400;

  // Custom-2 major opcode of the matrix extension (xmr / xmkN).
  localparam logic [6:0] OPC_XMNMC  = 7'h5b;
  localparam logic [4:0] FUNC5_XMR  = 5'd31;

  // Vector (near-memory) instructions issued by the eCPU to the VPUs.
  // instr[6:0]=OPC_VEC, [11:7]=vd, [14:12]=sew, [19:15]=vs1, [24:20]=vs2,
  // [25]=scalar operand (.vx form), [31:26]=operation.
  localparam logic [6:0] OPC_VEC = 7'h0b;

  typedef enum logic [5:0] {
    VADD    = 6'd0,
    VSUB    = 6'd1,
    VMUL    = 6'd2,
    VMACC   = 6'd3,   // vd += vs1 * (vs2 | scalar)
    VMAX    = 6'd4,
    VMIN    = 6'd5,
    VSRA    = 6'd6,   // vs1 >>> (vs2 | scalar)
    VMV     = 6'd7,   // vd = vs1 (or scalar splat for .vx)
    VSLIDEDN= 6'd8    // vd[i] = vs1[i+scalar], scalar counted in elements
  } vop_e;

  typedef enum logic [2:0] {
    SEW8  = 3'd0,
    SEW16 = 3'd1,
    SEW32 = 3'd2
  } sew_e;

  typedef struct packed {
    vop_e        op;
    logic        vx;
    logic [4:0]  vs2;
    logic [4:0]  vs1;
    sew_e        sew;
    logic [4:0]  vd;
    logic [31:0] scalar;
    logic [15:0] vl;      // vector length in elements
  } vinstr_t;

  // CORE-V-X-IF style coprocessor interface, reduced to what the bridge uses.
  typedef struct packed {
    logic [31:0] instr;
    logic [31:0] rs1;
    logic [31:0] rs2;
    logic [31:0] rs3;
    logic [3:0]  id;
  } xif_issue_req_t;

  typedef struct packed {
    logic accept;
    logic writeback;
  } xif_issue_resp_t;

  typedef struct packed {
    logic [3:0] id;
    logic       kill;
  } xif_commit_t;

  // Hardware DMA command: refill or write back one whole cache line.
  typedef struct packed {
    logic        wb;        // 1: VRF line -> memory, 0: memory -> VRF line
    logic [15:0] line;
    logic [31:0] addr;      // line-aligned external address
  } hdma_cmd_t;

  // One-cycle event pulses of the cache controller (for counters and tests).
  typedef struct packed {
    logic hit;          // access served from a valid line
    logic miss;         // miss detected, refill started
    logic writeback;    // dirty line written back (eviction or claim)
    logic lock_stall;   // host access held off by the eCPU lock
    logic war_stall;    // host store to a busy kernel source held off
    logic dst_stall;    // host access to a busy kernel destination held off
    logic claim;        // line taken out of the cache for a kernel
    logic at_lookup;    // Address Table consulted
  } llc_ev_t;

endpackage
