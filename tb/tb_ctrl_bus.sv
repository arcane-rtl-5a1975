// tb_ctrl_bus: address decoding to the five slaves, word offsets, routing of
// read data to the right master, eCPU priority over the host port, and reads
// of unmapped addresses returning zero.
module tb_ctrl_bus;
  import arcane_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t m0, m1;
  bus_rsp_t r0, r1;
  logic [4:0] sreq;
  logic swe;
  logic [3:0] sbe;
  logic [31:0] saddr, swdata;
  logic [4:0][31:0] srdata;
  logic [31:0] addr_q [5];

  ctrl_bus dut (.clk_i(clk), .rst_ni(rst_n), .m0_req_i(m0), .m0_rsp_o(r0), .m1_req_i(m1),
    .m1_rsp_o(r1), .s_req_o(sreq), .s_we_o(swe), .s_be_o(sbe), .s_addr_o(saddr),
    .s_wdata_o(swdata), .s_rdata_i(srdata));

  // slaves answer {slave index, address} one cycle later
  for (genvar s = 0; s < 5; s++) begin : g_s
    always_ff @(posedge clk) if (sreq[s]) srdata[s] <= {8'(s), saddr[23:0]};
  end

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic access(int m, logic [31:0] a, int exp_slv, logic [31:0] exp_off);
    @(negedge clk);
    if (m == 0) begin m0.req = 1; m0.addr = a; end else begin m1.req = 1; m1.addr = a; end
    #1;
    if (exp_slv >= 0) check(sreq == 5'(1 << exp_slv) && saddr == exp_off,
                            $sformatf("decode %h", a));
    else check(sreq == 0, $sformatf("unmapped %h", a));
    @(negedge clk); m0.req = 0; m1.req = 0;
    if (m == 0) check(r0.rvalid && !r1.rvalid && r0.rdata == ((exp_slv >= 0) ?
                      {8'(exp_slv), exp_off[23:0]} : 0), $sformatf("m0 read %h", a));
    else check(r1.rvalid && !r0.rvalid && r1.rdata == ((exp_slv >= 0) ?
               {8'(exp_slv), exp_off[23:0]} : 0), $sformatf("m1 read %h", a));
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    m0 = '0; m1 = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    access(0, 32'h0000_0124, 0, 32'h124);
    access(1, 32'h0000_3FFC, 0, 32'h3FFC);
    access(0, BRIDGE_BASE + 8, 1, 2);
    access(1, CFG_BASE + 16, 2, 4);
    access(0, AT_BASE + 32'h1F8, 3, 32'h7E);
    access(1, SWDMA_BASE + 28, 4, 7);
    access(0, 32'h0002_0000, -1, 0);
    // priority
    @(negedge clk); m0.req = 1; m0.addr = CFG_BASE; m1.req = 1; m1.addr = BRIDGE_BASE;
    #1 check(r0.gnt && !r1.gnt && sreq == 5'b00100, "eCPU has priority");
    @(negedge clk); m0.req = 0;
    #1 check(r1.gnt && sreq == 5'b00010, "host granted when eCPU idle");
    @(negedge clk); m1.req = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
