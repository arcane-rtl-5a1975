// tb_hw_dma: refills a line from the external memory model into a VRF word
// model and writes another line back, checking every word, the done pulse
// and that the engine moves exactly one line per command (256 reads and 256
// writes on the memory side). With no wait states a line takes 3 cycles per
// word, which is checked for the write-back.
module tb_hw_dma;
  import arcane_pkg::*;
  localparam int unsigned LINES = 4, WW = $clog2(LINES * LINE_WORDS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cvalid, cready, done;
  hdma_cmd_t cmd;
  logic vreq, vwe, vgnt, vrvalid;
  logic [WW-1:0] vaddr;
  logic [31:0] vwdata, vrdata;
  bus_req_t mreq;
  bus_rsp_t mrsp;
  logic [31:0] vmem [LINES * LINE_WORDS];
  logic stall;

  hw_dma #(.LINES(LINES)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cvalid), .cmd_ready_o(cready), .cmd_i(cmd),
    .done_o(done), .vrf_req_o(vreq), .vrf_we_o(vwe), .vrf_addr_o(vaddr), .vrf_wdata_o(vwdata),
    .vrf_gnt_i(vgnt), .vrf_rvalid_i(vrvalid), .vrf_rdata_i(vrdata), .mem_req_o(mreq),
    .mem_rsp_i(mrsp));

  ext_mem_model #(.WORDS(4096), .MAX_WAIT(0)) u_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(mreq),
                                                     .rsp_o(mrsp));

  // VRF model: random stalls, 1-cycle read latency
  assign vgnt = vreq && !stall;
  always_ff @(posedge clk) begin
    stall   <= ($urandom_range(3) == 0);
    vrvalid <= vgnt && !vwe;
    if (vgnt && vwe) vmem[vaddr] <= vwdata;
    if (vgnt && !vwe) vrdata <= vmem[vaddr];
  end

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc, r0, w0;
    cvalid = 0; cmd = '0;
    for (int i = 0; i < LINES * LINE_WORDS; i++) vmem[i] = 32'hAB00_0000 + 32'(i);
    repeat (2) @(negedge clk); rst_n = 1;
    // refill line 2 from byte address 0x800 (words 512..767)
    @(negedge clk); cvalid = 1; cmd.wb = 0; cmd.line = 16'd2; cmd.addr = 32'h800;
    #1 check(cready, "ready when idle");
    @(negedge clk); cvalid = 0;
    while (!done) @(negedge clk);
    for (int w = 0; w < LINE_WORDS; w++)
      check(vmem[2 * LINE_WORDS + w] == u_mem.init_word(512 + w), $sformatf("refill word %0d", w));
    check(vmem[3 * LINE_WORDS] == 32'hAB00_0000 + 32'(3 * LINE_WORDS), "neighbour line untouched");
    check(u_mem.reads == LINE_WORDS, "256 memory reads");
    // write back line 1 to 0x2000; no VRF stalls for the timing check
    force stall = 1'b0;
    r0 = u_mem.reads; w0 = u_mem.writes;
    @(negedge clk); cvalid = 1; cmd.wb = 1; cmd.line = 16'd1; cmd.addr = 32'h2000;
    @(posedge clk); #1 cvalid = 0; cyc = 0;
    while (!done) begin @(posedge clk); #1 cyc++; end
    check(cyc == 3 * LINE_WORDS, $sformatf("write-back cycles %0d", cyc));
    @(negedge clk);
    for (int w = 0; w < LINE_WORDS; w++)
      check(u_mem.mem[(32'h2000 >> 2) + w] == 32'hAB00_0000 + 32'(LINE_WORDS + w),
            $sformatf("write-back word %0d", w));
    check(u_mem.writes - w0 == LINE_WORDS && u_mem.reads == r0, "256 memory writes, no reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
