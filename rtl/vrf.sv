// vrf: vector register file of one VPU, built from LANES single-port SRAM
// banks, with the arbiter/multiplexer that shares the banks between the VPU
// lanes and the subsystem-bus port of the cache controller.
//
// Layout: the VRF is seen from the bus as VRF_BYTES/4 words. Word w lives in
// bank (w mod LANES) at row (w div LANES), so the LANES consecutive words of a
// row can be read by the lanes in one cycle and vector register r occupies
// words r*LINE_WORDS .. r*LINE_WORDS+LINE_WORDS-1, i.e. exactly one cache line.
//
// Arbitration: per bank, a lane request always wins; the bus request is
// granted (bus_gnt_o) only when the lane does not use the addressed bank in
// that cycle. Read data for lanes and bus both appear one cycle after the
// request. That the VPU wins, and this word interleaving, are choices of this
// design: the paper only shows an "Arbiter/Mux" between the ALUs, the banks and
// the subsystem bus.
module vrf #(
  parameter int unsigned LANES     = 4,
  parameter int unsigned VRF_BYTES = 32768,
  localparam int unsigned WORDS    = VRF_BYTES / 4,
  localparam int unsigned ROWS     = WORDS / LANES,
  localparam int unsigned RAW      = $clog2(ROWS),
  localparam int unsigned WAW      = $clog2(WORDS)
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  // lane ports (from the VPU), one per bank
  input  logic [LANES-1:0]           lane_req_i,
  input  logic [LANES-1:0]           lane_we_i,
  input  logic [LANES-1:0][RAW-1:0]  lane_addr_i,
  input  logic [LANES-1:0][31:0]     lane_wdata_i,
  output logic [LANES-1:0][31:0]     lane_rdata_o,
  // bus port (word address inside this VRF)
  input  logic                       bus_req_i,
  input  logic                       bus_we_i,
  input  logic [3:0]                 bus_be_i,
  input  logic [WAW-1:0]             bus_addr_i,
  input  logic [31:0]                bus_wdata_i,
  output logic                       bus_gnt_o,
  output logic                       bus_rvalid_o,
  output logic [31:0]                bus_rdata_o
);
  localparam int unsigned BW = (LANES > 1) ? $clog2(LANES) : 1;

  logic [BW-1:0]  bus_bank, bus_bank_q;
  logic [RAW-1:0] bus_row;
  logic [LANES-1:0]          m_req, m_we;
  logic [LANES-1:0][3:0]     m_be;
  logic [LANES-1:0][RAW-1:0] m_addr;
  logic [LANES-1:0][31:0]    m_wdata, m_rdata;

  assign bus_bank = BW'(bus_addr_i % WAW'(LANES));
  assign bus_row  = RAW'(bus_addr_i / WAW'(LANES));
  assign bus_gnt_o = bus_req_i && !lane_req_i[bus_bank];

  always_comb begin
    for (int b = 0; b < LANES; b++) begin
      if (lane_req_i[b]) begin
        m_req[b]   = 1'b1;
        m_we[b]    = lane_we_i[b];
        m_be[b]    = 4'hf;
        m_addr[b]  = lane_addr_i[b];
        m_wdata[b] = lane_wdata_i[b];
      end else begin
        m_req[b]   = bus_req_i && (bus_bank == BW'(b));
        m_we[b]    = bus_we_i;
        m_be[b]    = bus_be_i;
        m_addr[b]  = bus_row;
        m_wdata[b] = bus_wdata_i;
      end
    end
  end

  for (genvar b = 0; b < LANES; b++) begin : g_bank
    sram_bank #(.WORDS(ROWS)) u_bank (
      .clk_i  (clk_i),
      .req_i  (m_req[b]),
      .we_i   (m_we[b]),
      .be_i   (m_be[b]),
      .addr_i (m_addr[b]),
      .wdata_i(m_wdata[b]),
      .rdata_o(m_rdata[b])
    );
  end

  assign lane_rdata_o = m_rdata;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bus_rvalid_o <= 1'b0;
      bus_bank_q   <= '0;
    end else begin
      bus_rvalid_o <= bus_gnt_o && !bus_we_i;
      if (bus_gnt_o) bus_bank_q <= bus_bank;
    end
  end

  assign bus_rdata_o = m_rdata[bus_bank_q];
endmodule
