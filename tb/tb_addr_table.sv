// tb_addr_table: registers operand entries, then checks address lookups
// (busy source, busy destination, not busy, outside), range overlap, the
// update pulse with the entry's range, read back, and release of the busy flag.
module tb_addr_table;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req, we, upd, bsrc, bdst, ovl;
  logic [7:0] addr;
  logic [31:0] wdata, rdata, ustart, uend, lk, rs, re;

  addr_table #(.ENTRIES(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_we_i(we), .reg_addr_i(addr),
    .reg_wdata_i(wdata), .reg_rdata_o(rdata), .upd_o(upd), .upd_start_o(ustart),
    .upd_end_o(uend), .lk_addr_i(lk), .lk_busy_src_o(bsrc), .lk_busy_dst_o(bdst),
    .rg_start_i(rs), .rg_end_i(re), .rg_overlap_o(ovl));

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); req = 1; we = 1; addr = 8'(a); wdata = d;
    @(negedge clk); req = 0; we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); req = 1; we = 0; addr = 8'(a);
    @(negedge clk); req = 0; d = rdata;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    req = 0; we = 0; addr = 0; wdata = 0; lk = 0; rs = 0; re = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // entry 0: source 0x1000..0x13ff busy; entry 1: destination 0x2000..0x20ff busy
    wr(0, 32'h1000); wr(1, 32'h13ff);
    @(negedge clk); req = 1; we = 1; addr = 2; wdata = 32'b011;
    @(negedge clk); req = 0; we = 0;
    check(upd && ustart == 32'h1000 && uend == 32'h13ff, "update pulse with range");
    @(negedge clk); check(!upd, "update is a pulse");
    wr(4, 32'h2000); wr(5, 32'h20ff); wr(6, 32'b111);
    // entry 2: valid, not busy
    wr(8, 32'h3000); wr(9, 32'h30ff); wr(10, 32'b001);
    lk = 32'h1000; #1 check(bsrc && !bdst, "start of busy source");
    lk = 32'h13ff; #1 check(bsrc && !bdst, "end of busy source");
    lk = 32'h1400; #1 check(!bsrc && !bdst, "past source");
    lk = 32'h2080; #1 check(!bsrc && bdst, "busy destination");
    lk = 32'h3010; #1 check(!bsrc && !bdst, "valid but not busy");
    rs = 32'h3000; re = 32'h33ff; #1 check(ovl, "range overlaps entry 2");
    rs = 32'h1400; re = 32'h17ff; #1 check(!ovl, "range outside all entries");
    rs = 32'h0c00; re = 32'h0fff; #1 check(!ovl, "range just below source");
    rs = 32'h1000 - 1024 + 1024; re = 32'h13ff; #1 check(ovl, "range equal to source");
    rd(1, d); check(d == 32'h13ff, "read back end");
    rd(6, d); check(d == 32'b111, "read back control");
    // release destination
    wr(6, 32'b101);
    lk = 32'h2080; #1 check(!bdst, "destination released");
    wr(2, 32'b000);
    lk = 32'h1000; #1 check(!bsrc, "source invalidated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
