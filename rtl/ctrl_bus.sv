// ctrl_bus: the controller bus. Two masters, the eCPU data port (m0, fixed
// priority) and the host's slave port from the system bus (m1), reach five
// register/memory slaves decoded from the address:
//   0 eMEM   [EMEM_BASE,  +16 KiB)   1 bridge  BRIDGE_BASE
//   2 cfg    CFG_BASE                3 AT      AT_BASE
//   4 SW DMA SWDMA_BASE
// The selected master is granted in the cycle of its request; every slave
// returns read data one cycle later, and the bus raises rvalid for reads.
// Unmapped addresses are granted and read as zero. Slave address outputs are
// word offsets inside the slave. The paper only names this bus; the map,
// priority and timing are this design's choices.
module ctrl_bus
  import arcane_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  bus_req_t    m0_req_i,
  output bus_rsp_t    m0_rsp_o,
  input  bus_req_t    m1_req_i,
  output bus_rsp_t    m1_rsp_o,
  output logic [4:0]  s_req_o,
  output logic        s_we_o,
  output logic [3:0]  s_be_o,
  output logic [31:0] s_addr_o,     // byte address for eMEM, word offset else
  output logic [31:0] s_wdata_o,
  input  logic [4:0][31:0] s_rdata_i
);
  bus_req_t cur;
  logic     sel_m1;
  logic [2:0] slv, slv_q;
  logic     rd_q, m1_q;

  assign sel_m1 = !m0_req_i.req;
  assign cur    = sel_m1 ? m1_req_i : m0_req_i;

  always_comb begin
    slv = 3'd7;
    if (cur.addr < EMEM_BASE + 32'(CFG_EMEM_BYTES))        slv = 3'd0;
    else if ((cur.addr & ~32'hFF) == BRIDGE_BASE)          slv = 3'd1;
    else if ((cur.addr & ~32'hFF) == CFG_BASE)             slv = 3'd2;
    else if ((cur.addr & ~32'h1FF) == AT_BASE)             slv = 3'd3;
    else if ((cur.addr & ~32'hFF) == SWDMA_BASE)           slv = 3'd4;
  end

  always_comb begin
    s_req_o   = '0;
    if (cur.req && slv != 3'd7) s_req_o[slv] = 1'b1;
    s_we_o    = cur.we;
    s_be_o    = cur.be;
    s_wdata_o = cur.wdata;
    s_addr_o  = (slv == 3'd0) ? cur.addr - EMEM_BASE :
                (slv == 3'd3) ? 32'(cur.addr[8:2]) : 32'(cur.addr[7:2]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= 1'b0;
      m1_q  <= 1'b0;
      slv_q <= '0;
    end else begin
      rd_q  <= cur.req && !cur.we;
      m1_q  <= sel_m1;
      slv_q <= slv;
    end
  end

  logic [31:0] rdata;
  assign rdata = (slv_q == 3'd7) ? 32'd0 : s_rdata_i[slv_q];

  always_comb begin
    m0_rsp_o        = '0;
    m1_rsp_o        = '0;
    m0_rsp_o.gnt    = m0_req_i.req;
    m1_rsp_o.gnt    = sel_m1 && m1_req_i.req;
    m0_rsp_o.rvalid = rd_q && !m1_q;
    m1_rsp_o.rvalid = rd_q && m1_q;
    m0_rsp_o.rdata  = rdata;
    m1_rsp_o.rdata  = rdata;
  end
endmodule
