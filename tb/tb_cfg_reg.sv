// tb_cfg_reg: lock request bit and grant read-back, release pulse with its
// line range, VPU busy and per-VPU dirty-count reads.
module tb_cfg_reg;
  localparam int unsigned NUM_VPU = 4, LW = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req, we, lreq, lgnt, rel;
  logic [3:0] addr;
  logic [31:0] wdata, rdata;
  logic [LW-1:0] rf, rl;
  logic [NUM_VPU-1:0] busy;
  logic [NUM_VPU-1:0][LW:0] dc;

  cfg_reg #(.NUM_VPU(NUM_VPU), .LW(LW)) dut (.clk_i(clk), .rst_ni(rst_n), .reg_req_i(req),
    .reg_we_i(we), .reg_addr_i(addr), .reg_wdata_i(wdata), .reg_rdata_o(rdata),
    .lock_req_o(lreq), .lock_gnt_i(lgnt), .release_o(rel), .release_first_o(rf),
    .release_last_o(rl), .vpu_busy_i(busy), .dirty_cnt_i(dc));

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); req = 1; we = 0; addr = 4'(a);
    @(negedge clk); req = 0; d = rdata;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    req = 0; we = 0; addr = 0; wdata = 0; lgnt = 0; busy = 4'b1010;
    dc[0] = 3; dc[1] = 0; dc[2] = 17; dc[3] = 128;
    repeat (2) @(negedge clk); rst_n = 1;
    check(!lreq, "no lock after reset");
    @(negedge clk); req = 1; we = 1; addr = 0; wdata = 1;
    @(negedge clk); req = 0; we = 0;
    check(lreq, "lock requested");
    rd(0, d); check(d == 32'b01, "lock pending, not granted");
    lgnt = 1;
    rd(0, d); check(d == 32'b11, "lock granted visible");
    @(negedge clk); req = 1; we = 1; addr = 1; wdata = {16'd40, 16'd32};
    @(negedge clk); req = 0; we = 0;
    check(rel && rf == 32 && rl == 40, "release pulse and range");
    @(negedge clk); check(!rel, "release is a pulse");
    rd(2, d); check(d == 32'b1010, "vpu busy bits");
    for (int v = 0; v < NUM_VPU; v++) begin
      rd(4 + v, d); check(d == 32'(dc[v]), $sformatf("dirty count vpu %0d", v));
    end
    @(negedge clk); req = 1; we = 1; addr = 0; wdata = 0;
    @(negedge clk); req = 0; we = 0;
    check(!lreq, "lock released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
