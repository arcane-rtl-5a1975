// addr_table: the Address Table (AT). Each entry describes one kernel operand
// registered by the eCPU: start and end byte address (inclusive), a valid bit,
// a status flag busy, and a role bit (1 = destination, 0 = source).
//
// The eCPU writes entries through a small register port (word offsets:
// entry*4 + 0 start, +1 end, +2 control {role[2], busy[1], valid[0]}); every
// control write pulses upd_o with the entry's range so the cache table can
// flag cached lines that overlap it. Lookups are combinational: for a byte
// address the table reports whether it falls into a busy source or a busy
// destination (the controller then stalls stores resp. all accesses), and for
// a line range whether any valid entry overlaps it.
//
// From the paper: start/end addresses, validity and status flag, written by
// the eCPU. The role bit, the register layout and the entry count (16, the
// matrix map size is "configurable") are this design's choices.
module addr_table #(
  parameter int unsigned ENTRIES = 16,
  localparam int unsigned EW = $clog2(ENTRIES)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  // register port
  input  logic          reg_req_i,
  input  logic          reg_we_i,
  input  logic [7:0]    reg_addr_i,    // word offset
  input  logic [31:0]   reg_wdata_i,
  output logic [31:0]   reg_rdata_o,
  // range written
  output logic          upd_o,
  output logic [31:0]   upd_start_o,
  output logic [31:0]   upd_end_o,
  // address lookup
  input  logic [31:0]   lk_addr_i,
  output logic          lk_busy_src_o,
  output logic          lk_busy_dst_o,
  // range lookup (is any valid operand inside [start, end]?)
  input  logic [31:0]   rg_start_i,
  input  logic [31:0]   rg_end_i,
  output logic          rg_overlap_o
);
  typedef struct packed {
    logic [31:0] start_addr;
    logic [31:0] end_addr;
    logic        role_dst;
    logic        busy;
    logic        valid;
  } at_entry_t;

  at_entry_t at_q [ENTRIES];

  logic [EW-1:0] sel;
  assign sel = EW'(reg_addr_i[7:2]);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < ENTRIES; i++) at_q[i] <= '0;
    end else if (reg_req_i && reg_we_i && reg_addr_i[7:2] < 6'(ENTRIES)) begin
      case (reg_addr_i[1:0])
        2'd0: at_q[sel].start_addr <= reg_wdata_i;
        2'd1: at_q[sel].end_addr   <= reg_wdata_i;
        2'd2: {at_q[sel].role_dst, at_q[sel].busy, at_q[sel].valid} <= reg_wdata_i[2:0];
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      reg_rdata_o <= '0;
      upd_o       <= 1'b0;
      upd_start_o <= '0;
      upd_end_o   <= '0;
    end else begin
      upd_o <= reg_req_i && reg_we_i && reg_addr_i[1:0] == 2'd2 && reg_wdata_i[0] &&
               reg_addr_i[7:2] < 6'(ENTRIES);
      upd_start_o <= at_q[sel].start_addr;
      upd_end_o   <= at_q[sel].end_addr;
      case (reg_addr_i[1:0])
        2'd0:    reg_rdata_o <= at_q[sel].start_addr;
        2'd1:    reg_rdata_o <= at_q[sel].end_addr;
        2'd2:    reg_rdata_o <= {29'd0, at_q[sel].role_dst, at_q[sel].busy, at_q[sel].valid};
        default: reg_rdata_o <= '0;
      endcase
    end
  end

  always_comb begin
    lk_busy_src_o = 1'b0;
    lk_busy_dst_o = 1'b0;
    rg_overlap_o  = 1'b0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (at_q[i].valid && at_q[i].busy &&
          lk_addr_i >= at_q[i].start_addr && lk_addr_i <= at_q[i].end_addr) begin
        if (at_q[i].role_dst) lk_busy_dst_o = 1'b1;
        else                  lk_busy_src_o = 1'b1;
      end
      if (at_q[i].valid && at_q[i].start_addr <= rg_end_i && at_q[i].end_addr >= rg_start_i)
        rg_overlap_o = 1'b1;
    end
  end
endmodule
