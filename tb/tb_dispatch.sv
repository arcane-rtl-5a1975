// tb_dispatch: single-VPU and broadcast dispatch, waiting for all selected
// VPUs to be ready, refusal of a foreign opcode and of an empty mask, and the
// dispatch counter.
module tb_dispatch;
  import arcane_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, acc;
  logic [31:0] instr, rs1, rs2, vinstr, vrs1, vrs2, cnt;
  logic [3:0] vvalid, vready, busy;

  dispatch #(.NUM_VPU(4)) dut (.clk_i(clk), .rst_ni(rst_n), .issue_valid_i(iv),
    .issue_ready_o(ir), .issue_accept_o(acc), .instr_i(instr), .rs1_i(rs1), .rs2_i(rs2),
    .vpu_valid_o(vvalid), .vpu_ready_i(vready), .vpu_instr_o(vinstr), .vpu_rs1_o(vrs1),
    .vpu_rs2_o(vrs2), .busy_o(busy), .dispatched_o(cnt));

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    iv = 0; instr = 0; rs1 = 0; rs2 = 0; vready = 4'b1111;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); iv = 1; instr = {6'(VADD), 19'd0, OPC_VEC}; rs1 = 32'h55; rs2 = {12'd0, 4'b0100, 16'd256};
    #1 check(ir && acc && vvalid == 4'b0100 && vinstr == instr && vrs1 == 32'h55, "dispatch to VPU 2");
    @(negedge clk); rs2 = {12'd0, 4'b1011, 16'd8}; vready = 4'b0111;
    #1 check(!ir && vvalid == 0, "broadcast waits for VPU 3");
    check(busy == 4'b1000, "busy reflects VPU 3");
    @(negedge clk); vready = 4'b1111;
    #1 check(ir && vvalid == 4'b1011, "broadcast to VPUs 0,1,3 together");
    @(negedge clk); instr = 32'h0000_0033;
    #1 check(ir && !acc && vvalid == 0, "foreign opcode refused");
    @(negedge clk); instr = {6'(VADD), 19'd0, OPC_VEC}; rs2 = 32'd16;
    #1 check(ir && !acc && vvalid == 0, "empty mask refused");
    @(negedge clk); iv = 0;
    #1 check(cnt == 2, "two instructions dispatched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
