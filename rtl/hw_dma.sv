// hw_dma: line-transfer engine of the LLC. On a command from the cache
// controller it either refills a cache line (external memory -> VRF) or
// writes a dirty line back (VRF -> external memory), one 32-bit word at a
// time, and pulses done_o when the last word has been written.
//
// VRF side: a word port addressed by global line word index
// (line*LINE_WORDS + word), routed by the controller to the owning VRF.
// Memory side: request/grant/read-valid bus with byte addresses.
// Each word costs a read request, a data cycle and a write, so a 1 KiB line
// takes at least 3*256 cycles with zero-wait memory; it is not pipelined.
// The paper says only that misses and write-backs are served by a dedicated
// DMA; the word-serial transfer is this design's simplest choice.
module hw_dma
  import arcane_pkg::*;
#(
  parameter int unsigned LINES = 128,
  localparam int unsigned WW   = $clog2(LINES * LINE_WORDS)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            cmd_valid_i,
  output logic            cmd_ready_o,
  input  hdma_cmd_t       cmd_i,
  output logic            done_o,
  // VRF word port
  output logic            vrf_req_o,
  output logic            vrf_we_o,
  output logic [WW-1:0]   vrf_addr_o,
  output logic [31:0]     vrf_wdata_o,
  input  logic            vrf_gnt_i,
  input  logic            vrf_rvalid_i,
  input  logic [31:0]     vrf_rdata_i,
  // external memory port
  output bus_req_t        mem_req_o,
  input  bus_rsp_t        mem_rsp_i
);
  typedef enum logic [2:0] {S_IDLE, S_RD_REQ, S_RD_WAIT, S_WR_REQ} state_e;

  state_e      state_q;
  hdma_cmd_t   cmd_q;
  logic [$clog2(LINE_WORDS):0] w_q;
  logic [31:0] data_q;

  assign cmd_ready_o = (state_q == S_IDLE);

  // source of the read and target of the write depend on the direction
  logic src_is_vrf;
  assign src_is_vrf = cmd_q.wb;

  always_comb begin
    vrf_req_o   = 1'b0;
    vrf_we_o    = 1'b0;
    vrf_addr_o  = WW'(32'(cmd_q.line) * LINE_WORDS + 32'(w_q));
    vrf_wdata_o = data_q;
    mem_req_o       = '0;
    mem_req_o.be    = 4'hf;
    mem_req_o.addr  = cmd_q.addr + 32'(w_q) * 4;
    mem_req_o.wdata = data_q;
    case (state_q)
      S_RD_REQ: if (src_is_vrf) vrf_req_o = 1'b1; else mem_req_o.req = 1'b1;
      S_WR_REQ: begin
        if (src_is_vrf) begin
          mem_req_o.req = 1'b1;
          mem_req_o.we  = 1'b1;
        end else begin
          vrf_req_o = 1'b1;
          vrf_we_o  = 1'b1;
        end
      end
      default: ;
    endcase
  end

  logic rd_gnt, rd_valid, wr_gnt;
  logic [31:0] rd_data;
  assign rd_gnt   = src_is_vrf ? vrf_gnt_i    : mem_rsp_i.gnt;
  assign rd_valid = src_is_vrf ? vrf_rvalid_i : mem_rsp_i.rvalid;
  assign rd_data  = src_is_vrf ? vrf_rdata_i  : mem_rsp_i.rdata;
  assign wr_gnt   = src_is_vrf ? mem_rsp_i.gnt : vrf_gnt_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      cmd_q   <= '0;
      w_q     <= '0;
      data_q  <= '0;
      done_o  <= 1'b0;
    end else begin
      done_o <= 1'b0;
      case (state_q)
        S_IDLE:
          if (cmd_valid_i) begin
            cmd_q   <= cmd_i;
            w_q     <= '0;
            state_q <= S_RD_REQ;
          end
        S_RD_REQ:  if (rd_gnt) state_q <= S_RD_WAIT;
        S_RD_WAIT:
          if (rd_valid) begin
            data_q  <= rd_data;
            state_q <= S_WR_REQ;
          end
        S_WR_REQ:
          if (wr_gnt) begin
            if (32'(w_q) == LINE_WORDS - 1) begin
              state_q <= S_IDLE;
              done_o  <= 1'b1;
            end else begin
              w_q     <= w_q + 1'b1;
              state_q <= S_RD_REQ;
            end
          end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
