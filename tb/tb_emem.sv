// tb_emem: writes through the controller-bus port (with byte enables),
// reads back through both the instruction-fetch port and the bus port, and
// checks the one-cycle read latency of each.
module tb_emem;
  import arcane_pkg::*;
  localparam int unsigned BYTES = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t areq;
  bus_rsp_t arsp;
  logic breq, bwe;
  logic [3:0] bbe;
  logic [31:0] baddr, bwdata, brdata;
  logic [31:0] model [BYTES / 4];

  emem #(.BYTES(BYTES)) dut (.clk_i(clk), .rst_ni(rst_n), .a_req_i(areq), .a_rsp_o(arsp),
    .b_req_i(breq), .b_we_i(bwe), .b_be_i(bbe), .b_addr_i(baddr), .b_wdata_i(bwdata),
    .b_rdata_o(brdata));

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    areq = '0; breq = 0; bwe = 0; bbe = 0; baddr = 0; bwdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < BYTES / 4; i++) begin
      @(negedge clk); breq = 1; bwe = 1; bbe = 4'hf; baddr = 32'(4 * i); bwdata = $urandom;
      model[i] = bwdata;
    end
    @(negedge clk); breq = 1; bwe = 1; bbe = 4'b0010; baddr = 32'h10; bwdata = 32'h0000_AB00;
    model[4][15:8] = 8'hAB;
    @(negedge clk); breq = 0; bwe = 0;
    for (int n = 0; n < 40; n++) begin
      int i;
      i = $urandom_range(BYTES / 4 - 1);
      if (n == 0) i = 4;
      @(negedge clk); areq.req = 1; areq.addr = 32'(4 * i);
      breq = 1; bwe = 0; baddr = 32'(4 * ((i + 1) % (BYTES / 4)));
      #1 check(arsp.gnt, "fetch granted");
      @(negedge clk); areq.req = 0; breq = 0;
      check(arsp.rvalid && arsp.rdata == model[i], $sformatf("fetch word %0d", i));
      check(brdata == model[(i + 1) % (BYTES / 4)], $sformatf("bus word %0d", i + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
