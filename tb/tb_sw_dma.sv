// tb_sw_dma: programs a 2D transfer (5 rows of 7 words, different source and
// destination strides) into a memory model with random wait states, then
// checks every destination word, that the gaps between destination rows are
// untouched, the busy/done status bits, the interrupt and the done clear.
module tb_sw_dma;
  import arcane_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req, we, irq;
  logic [2:0] addr;
  logic [31:0] wdata, rdata;
  bus_req_t mreq;
  bus_rsp_t mrsp;

  sw_dma dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_we_i(we), .reg_addr_i(addr),
              .reg_wdata_i(wdata), .reg_rdata_o(rdata), .irq_o(irq), .mem_req_o(mreq),
              .mem_rsp_i(mrsp));
  ext_mem_model #(.WORDS(4096), .MAX_WAIT(3), .LAT(2)) u_mem (.clk_i(clk), .rst_ni(rst_n),
                                                              .req_i(mreq), .rsp_o(mrsp));

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); req = 1; we = 1; addr = 3'(a); wdata = d;
    @(negedge clk); req = 0; we = 0;
  endtask
  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); req = 1; we = 0; addr = 3'(a);
    @(negedge clk); req = 0; d = rdata;
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] st;
    req = 0; we = 0; addr = 0; wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    wr(0, 32'h0000_0100);   // src word 64
    wr(1, 32'h0000_2000);   // dst word 2048
    wr(2, 32'd64);          // src stride: 16 words
    wr(3, 32'd40);          // dst stride: 10 words
    wr(4, 32'd7);
    wr(5, 32'd5);
    rd(4, st); check(st == 7, "width read back");
    wr(6, 32'd1);
    rd(7, st); check(st[0] && !st[1], "busy while running");
    while (!irq) @(negedge clk);
    rd(7, st); check(!st[0] && st[1], "done after transfer");
    for (int r = 0; r < 5; r++) begin
      for (int c = 0; c < 7; c++)
        check(u_mem.mem[2048 + r * 10 + c] == u_mem.init_word(64 + r * 16 + c),
              $sformatf("dst r%0d c%0d", r, c));
      for (int c = 7; c < 10; c++)
        check(u_mem.mem[2048 + r * 10 + c] == u_mem.init_word(2048 + r * 10 + c),
              $sformatf("gap r%0d c%0d untouched", r, c));
    end
    check(u_mem.writes == 35, "35 words written");
    wr(7, 0);
    @(negedge clk); check(!irq, "done cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
