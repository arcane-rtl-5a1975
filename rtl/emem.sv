// emem: embedded memory of the controller (16 KiB by default) holding the
// eCPU firmware and data. Port A is the eCPU instruction fetch port
// (read only, request/grant/read-valid); port B is the controller-bus port
// (read/write with byte enables) through which the eCPU accesses data and the
// host uploads the firmware. Both ports are always granted and return read
// data one cycle after the request. Size from the paper; ports and timing are
// this design's choices.
module emem
  import arcane_pkg::*;
#(
  parameter int unsigned BYTES = 16384,
  localparam int unsigned WORDS = BYTES / 4,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  bus_req_t    a_req_i,
  output bus_rsp_t    a_rsp_o,
  input  logic        b_req_i,
  input  logic        b_we_i,
  input  logic [3:0]  b_be_i,
  input  logic [31:0] b_addr_i,
  input  logic [31:0] b_wdata_i,
  output logic [31:0] b_rdata_o
);
  logic [31:0] mem [WORDS];
  logic        a_rvalid_q;
  logic [31:0] a_rdata_q;

  always_ff @(posedge clk_i) begin
    if (a_req_i.req) a_rdata_q <= mem[AW'(a_req_i.addr[31:2])];
    if (b_req_i) begin
      if (b_we_i) begin
        for (int b = 0; b < 4; b++)
          if (b_be_i[b]) mem[AW'(b_addr_i[31:2])][8*b +: 8] <= b_wdata_i[8*b +: 8];
      end else begin
        b_rdata_o <= mem[AW'(b_addr_i[31:2])];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) a_rvalid_q <= 1'b0;
    else         a_rvalid_q <= a_req_i.req;
  end

  assign a_rsp_o.gnt    = a_req_i.req;
  assign a_rsp_o.rvalid = a_rvalid_q;
  assign a_rsp_o.rdata  = a_rdata_q;
endmodule
