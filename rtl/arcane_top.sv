// arcane_top: the ARCANE last-level cache with near-memory compute, everything
// except the embedded controller core (eCPU), whose ports are brought out.
//
// Data path: the host's cache port goes to the LLC controller, which keeps
// its 1 KiB lines in the vector register files of NUM_VPU VPUs (one line per
// vector register, LINES = NUM_VPU * VRF_BYTES / 1 KiB). Misses and
// write-backs are carried out by the HW DMA towards the external memory port.
// Control path: the host offloads matrix instructions (custom-2 opcode) over
// its coprocessor interface to the X-IF bridge, which interrupts the eCPU.
// The eCPU firmware (in eMEM) decodes them, registers operands in the Address
// Table, takes the cache lock, programs the SW DMA to place operands in vector
// registers, issues vector instructions through the dispatcher to the VPUs,
// writes results back with the SW DMA and releases lines and lock. All of the
// eCPU's registers are reached through the controller bus, which the host can
// also reach (firmware upload, configuration) through hcfg_*.
//
// Global VRF word index (subsystem bus): line*256 + word; VPU = index / (VRF
// words). Default sizes are those of the paper's 4-VPU, 4-lane, 128 KiB
// configuration with a 16 KiB eMEM.
module arcane_top
  import arcane_pkg::*;
#(
  parameter int unsigned NUM_VPU    = CFG_NUM_VPU,
  parameter int unsigned LANES      = CFG_LANES,
  parameter int unsigned VRF_BYTES  = CFG_VRF_BYTES,
  parameter int unsigned AT_ENTRIES = CFG_AT_ENTRIES,
  parameter int unsigned EMEM_BYTES = CFG_EMEM_BYTES,
  localparam int unsigned LINES   = NUM_VPU * VRF_BYTES / LINE_BYTES,
  localparam int unsigned LW      = $clog2(LINES),
  localparam int unsigned WW      = $clog2(LINES * LINE_WORDS),
  localparam int unsigned VW      = $clog2(VRF_BYTES / 4),
  localparam int unsigned ROWS    = VRF_BYTES / 4 / LANES,
  localparam int unsigned RAW     = $clog2(ROWS)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // host: cache port and configuration port on the system bus
  input  bus_req_t        host_req_i,
  output bus_rsp_t        host_rsp_o,
  input  bus_req_t        hcfg_req_i,
  output bus_rsp_t        hcfg_rsp_o,
  // host: coprocessor interface
  input  logic            x_issue_valid_i,
  output logic            x_issue_ready_o,
  input  xif_issue_req_t  x_issue_req_i,
  output xif_issue_resp_t x_issue_resp_o,
  input  logic            x_commit_valid_i,
  input  xif_commit_t     x_commit_i,
  output logic            x_result_valid_o,
  input  logic            x_result_ready_i,
  output logic [3:0]      x_result_id_o,
  // eCPU (external core): interrupts, fetch, data and vector issue
  output logic [1:0]      ecpu_irq_o,        // {SW DMA done, bridge}
  input  bus_req_t        ecpu_ifetch_req_i,
  output bus_rsp_t        ecpu_ifetch_rsp_o,
  input  bus_req_t        ecpu_data_req_i,
  output bus_rsp_t        ecpu_data_rsp_o,
  input  logic            ecpu_x_valid_i,
  output logic            ecpu_x_ready_o,
  output logic            ecpu_x_accept_o,
  input  logic [31:0]     ecpu_x_instr_i,
  input  logic [31:0]     ecpu_x_rs1_i,
  input  logic [31:0]     ecpu_x_rs2_i,
  // external (off-chip) memory
  output bus_req_t        ext_req_o,
  input  bus_rsp_t        ext_rsp_i,
  // observability
  output llc_ev_t         llc_ev_o
);
  // ---------------- controller bus ----------------
  logic [4:0]        s_req;
  logic              s_we;
  logic [3:0]        s_be;
  logic [31:0]       s_addr, s_wdata;
  logic [4:0][31:0]  s_rdata;

  ctrl_bus u_ctrl_bus (
    .clk_i, .rst_ni,
    .m0_req_i (ecpu_data_req_i),
    .m0_rsp_o (ecpu_data_rsp_o),
    .m1_req_i (hcfg_req_i),
    .m1_rsp_o (hcfg_rsp_o),
    .s_req_o  (s_req),
    .s_we_o   (s_we),
    .s_be_o   (s_be),
    .s_addr_o (s_addr),
    .s_wdata_o(s_wdata),
    .s_rdata_i(s_rdata)
  );

  emem #(.BYTES(EMEM_BYTES)) u_emem (
    .clk_i, .rst_ni,
    .a_req_i  (ecpu_ifetch_req_i),
    .a_rsp_o  (ecpu_ifetch_rsp_o),
    .b_req_i  (s_req[0]),
    .b_we_i   (s_we),
    .b_be_i   (s_be),
    .b_addr_i (s_addr),
    .b_wdata_i(s_wdata),
    .b_rdata_o(s_rdata[0])
  );

  logic irq_bridge, irq_dma;
  assign ecpu_irq_o = {irq_dma, irq_bridge};

  xif_bridge u_bridge (
    .clk_i, .rst_ni,
    .issue_valid_i (x_issue_valid_i),
    .issue_ready_o (x_issue_ready_o),
    .issue_req_i   (x_issue_req_i),
    .issue_resp_o  (x_issue_resp_o),
    .commit_valid_i(x_commit_valid_i),
    .commit_i      (x_commit_i),
    .result_valid_o(x_result_valid_o),
    .result_ready_i(x_result_ready_i),
    .result_id_o   (x_result_id_o),
    .irq_o         (irq_bridge),
    .reg_req_i     (s_req[1]),
    .reg_we_i      (s_we),
    .reg_addr_i    (s_addr[2:0]),
    .reg_wdata_i   (s_wdata),
    .reg_rdata_o   (s_rdata[1])
  );

  // ---------------- configuration and LLC controller ----------------
  logic                     lock_req, lock_gnt, rel;
  logic [LW-1:0]            rel_first, rel_last;
  logic [NUM_VPU-1:0]       vpu_busy;
  logic [NUM_VPU-1:0][LW:0] dirty_cnt;

  cfg_reg #(.NUM_VPU(NUM_VPU), .LW(LW)) u_cfg (
    .clk_i, .rst_ni,
    .reg_req_i      (s_req[2]),
    .reg_we_i       (s_we),
    .reg_addr_i     (s_addr[3:0]),
    .reg_wdata_i    (s_wdata),
    .reg_rdata_o    (s_rdata[2]),
    .lock_req_o     (lock_req),
    .lock_gnt_i     (lock_gnt),
    .release_o      (rel),
    .release_first_o(rel_first),
    .release_last_o (rel_last),
    .vpu_busy_i     (vpu_busy),
    .dirty_cnt_i    (dirty_cnt)
  );

  bus_req_t dma_req;
  bus_rsp_t dma_rsp;

  sw_dma u_sw_dma (
    .clk_i, .rst_ni,
    .reg_req_i  (s_req[4]),
    .reg_we_i   (s_we),
    .reg_addr_i (s_addr[2:0]),
    .reg_wdata_i(s_wdata),
    .reg_rdata_o(s_rdata[4]),
    .irq_o      (irq_dma),
    .mem_req_o  (dma_req),
    .mem_rsp_i  (dma_rsp)
  );

  logic          hdma_valid, hdma_ready, hdma_done;
  hdma_cmd_t     hdma_cmd;
  logic          hv_req, hv_we, hv_gnt, hv_rvalid;
  logic [WW-1:0] hv_addr;
  logic [31:0]   hv_wdata, hv_rdata;
  logic          v_req, v_we, v_gnt, v_rvalid;
  logic [3:0]    v_be;
  logic [WW-1:0] v_addr;
  logic [31:0]   v_wdata, v_rdata;

  llc_ctl #(.LINES(LINES), .NUM_VPU(NUM_VPU), .AT_ENTRIES(AT_ENTRIES)) u_llc_ctl (
    .clk_i, .rst_ni,
    .host_req_i       (host_req_i),
    .host_rsp_o       (host_rsp_o),
    .dma_req_i        (dma_req),
    .dma_rsp_o        (dma_rsp),
    .lock_req_i       (lock_req),
    .lock_gnt_o       (lock_gnt),
    .release_i        (rel),
    .release_first_i  (rel_first),
    .release_last_i   (rel_last),
    .dirty_cnt_o      (dirty_cnt),
    .at_req_i         (s_req[3]),
    .at_we_i          (s_we),
    .at_addr_i        (s_addr[7:0]),
    .at_wdata_i       (s_wdata),
    .at_rdata_o       (s_rdata[3]),
    .hdma_valid_o     (hdma_valid),
    .hdma_ready_i     (hdma_ready),
    .hdma_cmd_o       (hdma_cmd),
    .hdma_done_i      (hdma_done),
    .hdma_vrf_req_i   (hv_req),
    .hdma_vrf_we_i    (hv_we),
    .hdma_vrf_addr_i  (hv_addr),
    .hdma_vrf_wdata_i (hv_wdata),
    .hdma_vrf_gnt_o   (hv_gnt),
    .hdma_vrf_rvalid_o(hv_rvalid),
    .hdma_vrf_rdata_o (hv_rdata),
    .vrf_req_o        (v_req),
    .vrf_we_o         (v_we),
    .vrf_be_o         (v_be),
    .vrf_addr_o       (v_addr),
    .vrf_wdata_o      (v_wdata),
    .vrf_gnt_i        (v_gnt),
    .vrf_rvalid_i     (v_rvalid),
    .vrf_rdata_i      (v_rdata),
    .ev_o             (llc_ev_o)
  );

  hw_dma #(.LINES(LINES)) u_hw_dma (
    .clk_i, .rst_ni,
    .cmd_valid_i (hdma_valid),
    .cmd_ready_o (hdma_ready),
    .cmd_i       (hdma_cmd),
    .done_o      (hdma_done),
    .vrf_req_o   (hv_req),
    .vrf_we_o    (hv_we),
    .vrf_addr_o  (hv_addr),
    .vrf_wdata_o (hv_wdata),
    .vrf_gnt_i   (hv_gnt),
    .vrf_rvalid_i(hv_rvalid),
    .vrf_rdata_i (hv_rdata),
    .mem_req_o   (ext_req_o),
    .mem_rsp_i   (ext_rsp_i)
  );

  // ---------------- dispatcher and vector units ----------------
  logic [NUM_VPU-1:0] vi_valid, vi_ready;
  logic [31:0]        vi_instr, vi_rs1, vi_rs2;

  dispatch #(.NUM_VPU(NUM_VPU)) u_dispatch (
    .clk_i, .rst_ni,
    .issue_valid_i (ecpu_x_valid_i),
    .issue_ready_o (ecpu_x_ready_o),
    .issue_accept_o(ecpu_x_accept_o),
    .instr_i       (ecpu_x_instr_i),
    .rs1_i         (ecpu_x_rs1_i),
    .rs2_i         (ecpu_x_rs2_i),
    .vpu_valid_o   (vi_valid),
    .vpu_ready_i   (vi_ready),
    .vpu_instr_o   (vi_instr),
    .vpu_rs1_o     (vi_rs1),
    .vpu_rs2_o     (vi_rs2),
    .busy_o        (vpu_busy),
    .dispatched_o  ()
  );

  // subsystem bus: one word port from the controller to the owning VRF
  localparam int unsigned PW = (NUM_VPU > 1) ? $clog2(NUM_VPU) : 1;
  logic [PW-1:0]              v_sel, v_sel_q;
  logic [NUM_VPU-1:0]         b_gnt, b_rvalid;
  logic [NUM_VPU-1:0][31:0]   b_rdata;

  assign v_sel   = PW'(32'(v_addr) / (VRF_BYTES / 4));
  assign v_gnt   = b_gnt[v_sel];
  assign v_rvalid = |b_rvalid;
  assign v_rdata = b_rdata[v_sel_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) v_sel_q <= '0;
    else if (v_req) v_sel_q <= v_sel;
  end

  for (genvar v = 0; v < NUM_VPU; v++) begin : g_vpu
    logic [LANES-1:0]           l_req, l_we;
    logic [LANES-1:0][RAW-1:0]  l_addr;
    logic [LANES-1:0][31:0]     l_wdata, l_rdata;

    vpu #(.LANES(LANES), .VRF_BYTES(VRF_BYTES)) u_vpu (
      .clk_i, .rst_ni,
      .in_valid_i  (vi_valid[v]),
      .in_ready_o  (vi_ready[v]),
      .in_instr_i  (vi_instr),
      .in_rs1_i    (vi_rs1),
      .in_rs2_i    (vi_rs2),
      .busy_o      (),
      .done_o      (),
      .illegal_o   (),
      .lane_req_o  (l_req),
      .lane_we_o   (l_we),
      .lane_addr_o (l_addr),
      .lane_wdata_o(l_wdata),
      .lane_rdata_i(l_rdata)
    );

    vrf #(.LANES(LANES), .VRF_BYTES(VRF_BYTES)) u_vrf (
      .clk_i, .rst_ni,
      .lane_req_i  (l_req),
      .lane_we_i   (l_we),
      .lane_addr_i (l_addr),
      .lane_wdata_i(l_wdata),
      .lane_rdata_o(l_rdata),
      .bus_req_i   (v_req && v_sel == PW'(v)),
      .bus_we_i    (v_we),
      .bus_be_i    (v_be),
      .bus_addr_i  (VW'(v_addr)),
      .bus_wdata_i (v_wdata),
      .bus_gnt_o   (b_gnt[v]),
      .bus_rvalid_o(b_rvalid[v]),
      .bus_rdata_o (b_rdata[v])
    );
  end
endmodule
