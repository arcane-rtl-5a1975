// sw_dma: software-driven 2D DMA used by the eCPU's matrix allocator to move
// matrix operands between memory and VPU vector registers, and results back.
// All of its accesses go through the LLC controller's DMA port, which serves
// ordinary addresses from the cache (refilling on a miss) and addresses in the
// VRF window directly from a vector register, taking that line out of the
// cache.
//
// Registers (word offsets on the controller bus):
//   0 SRC  1 DST  2 SRC_STRIDE  3 DST_STRIDE (bytes from row to row)
//   4 WIDTH (32-bit words per row)  5 HEIGHT (rows)
//   6 CTRL  write 1 starts the transfer
//   7 STATUS  bit0 busy, bit1 done (sticky, cleared by writing STATUS)
// Register reads return data on the cycle after the request. irq_o follows
// the done bit. The transfer copies HEIGHT rows of WIDTH words,
// word by word: read (request, data) then write, so about four cycles per word
// on hits. The paper gives the 2D capability and the routing through the LLC
// controller; register layout, word granularity and timing are this design's.
module sw_dma
  import arcane_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        reg_req_i,
  input  logic        reg_we_i,
  input  logic [2:0]  reg_addr_i,
  input  logic [31:0] reg_wdata_i,
  output logic [31:0] reg_rdata_o,
  output logic        irq_o,
  output bus_req_t    mem_req_o,
  input  bus_rsp_t    mem_rsp_i
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_RD_WAIT, S_WR} state_e;

  state_e      state_q;
  logic [31:0] src_q, dst_q, sstride_q, dstride_q, width_q, height_q;
  logic [31:0] col_q, row_q, data_q;
  logic        done_q;

  logic [31:0] src_addr, dst_addr;
  assign src_addr = src_q + row_q * sstride_q + col_q * 4;
  assign dst_addr = dst_q + row_q * dstride_q + col_q * 4;

  always_comb begin
    mem_req_o       = '0;
    mem_req_o.be    = 4'hf;
    mem_req_o.wdata = data_q;
    mem_req_o.req   = (state_q == S_RD) || (state_q == S_WR);
    mem_req_o.we    = (state_q == S_WR);
    mem_req_o.addr  = (state_q == S_WR) ? dst_addr : src_addr;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= S_IDLE;
      src_q     <= '0;
      dst_q     <= '0;
      sstride_q <= '0;
      dstride_q <= '0;
      width_q   <= '0;
      height_q  <= '0;
      col_q     <= '0;
      row_q     <= '0;
      data_q    <= '0;
      done_q    <= 1'b0;
    end else begin
      if (reg_req_i && reg_we_i && state_q == S_IDLE) begin
        case (reg_addr_i)
          3'd0: src_q     <= reg_wdata_i;
          3'd1: dst_q     <= reg_wdata_i;
          3'd2: sstride_q <= reg_wdata_i;
          3'd3: dstride_q <= reg_wdata_i;
          3'd4: width_q   <= reg_wdata_i;
          3'd5: height_q  <= reg_wdata_i;
          3'd6: if (reg_wdata_i[0] && width_q != 0 && height_q != 0) begin
                  state_q <= S_RD;
                  col_q   <= '0;
                  row_q   <= '0;
                  done_q  <= 1'b0;
                end
          3'd7: done_q <= 1'b0;
          default: ;
        endcase
      end
      case (state_q)
        S_RD:      if (mem_rsp_i.gnt) state_q <= S_RD_WAIT;
        S_RD_WAIT: if (mem_rsp_i.rvalid) begin
                     data_q  <= mem_rsp_i.rdata;
                     state_q <= S_WR;
                   end
        S_WR:      if (mem_rsp_i.gnt) begin
                     if (col_q + 1 < width_q) begin
                       col_q   <= col_q + 1;
                       state_q <= S_RD;
                     end else if (row_q + 1 < height_q) begin
                       col_q   <= '0;
                       row_q   <= row_q + 1;
                       state_q <= S_RD;
                     end else begin
                       state_q <= S_IDLE;
                       done_q  <= 1'b1;
                     end
                   end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) reg_rdata_o <= '0;
    else if (reg_req_i) begin
      case (reg_addr_i)
        3'd0:    reg_rdata_o <= src_q;
        3'd1:    reg_rdata_o <= dst_q;
        3'd2:    reg_rdata_o <= sstride_q;
        3'd3:    reg_rdata_o <= dstride_q;
        3'd4:    reg_rdata_o <= width_q;
        3'd5:    reg_rdata_o <= height_q;
        3'd7:    reg_rdata_o <= {30'd0, done_q, state_q != S_IDLE};
        default: reg_rdata_o <= '0;
      endcase
    end
  end

  assign irq_o = done_q;
endmodule
