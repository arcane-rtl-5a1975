// cfg_reg: memory-mapped configuration registers of the LLC controller,
// written by the eCPU (and readable by the host).
//   0 LOCK     bit0 lock request (read/write), bit1 lock granted (read only)
//   1 RELEASE  write {last[31:16], first[15:0]}: lines first..last stop being
//              "busy computing" and return to the cache
//   2 VPUBUSY  read: one busy bit per VPU
//   4+v        read: number of dirty lines in VPU v (scheduler policy input)
// Read data appear one cycle after the request. The lock register follows
// the paper (written by the eCPU, read by the controller); the other
// registers and the map are this design's choices.
module cfg_reg #(
  parameter int unsigned NUM_VPU = 4,
  parameter int unsigned LW      = 7
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     reg_req_i,
  input  logic                     reg_we_i,
  input  logic [3:0]               reg_addr_i,
  input  logic [31:0]              reg_wdata_i,
  output logic [31:0]              reg_rdata_o,
  output logic                     lock_req_o,
  input  logic                     lock_gnt_i,
  output logic                     release_o,
  output logic [LW-1:0]            release_first_o,
  output logic [LW-1:0]            release_last_o,
  input  logic [NUM_VPU-1:0]       vpu_busy_i,
  input  logic [NUM_VPU-1:0][LW:0] dirty_cnt_i
);
  logic we;
  assign we = reg_req_i && reg_we_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lock_req_o      <= 1'b0;
      release_o       <= 1'b0;
      release_first_o <= '0;
      release_last_o  <= '0;
      reg_rdata_o     <= '0;
    end else begin
      release_o <= 1'b0;
      if (we && reg_addr_i == 4'd0) lock_req_o <= reg_wdata_i[0];
      if (we && reg_addr_i == 4'd1) begin
        release_o       <= 1'b1;
        release_first_o <= LW'(reg_wdata_i[15:0]);
        release_last_o  <= LW'(reg_wdata_i[31:16]);
      end
      if (reg_req_i) begin
        reg_rdata_o <= '0;
        if (reg_addr_i == 4'd0) reg_rdata_o <= {30'd0, lock_gnt_i, lock_req_o};
        if (reg_addr_i == 4'd2) reg_rdata_o <= 32'(vpu_busy_i);
        for (int v = 0; v < NUM_VPU; v++)
          if (reg_addr_i == 4'(4 + v)) reg_rdata_o <= 32'(dirty_cnt_i[v]);
      end
    end
  end
endmodule
