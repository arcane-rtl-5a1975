// tb_xif_bridge: plays the host (issue, commit, result) and the eCPU
// (interrupt, register reads, decision, acknowledge) through four flows:
// a foreign opcode refused at once, an instruction accepted and committed,
// one refused by the eCPU, and one accepted and then killed. Checks that the
// sampled operands reach the eCPU registers and that issue_ready waits for the
// software decision.
module tb_xif_bridge;
  import arcane_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, cv, rv, rr, irq, req, we;
  xif_issue_req_t ireq;
  xif_issue_resp_t iresp;
  xif_commit_t com;
  logic [3:0] rid;
  logic [2:0] addr;
  logic [31:0] wdata, rdata;

  xif_bridge dut (.clk_i(clk), .rst_ni(rst_n), .issue_valid_i(iv), .issue_ready_o(ir),
    .issue_req_i(ireq), .issue_resp_o(iresp), .commit_valid_i(cv), .commit_i(com),
    .result_valid_o(rv), .result_ready_i(rr), .result_id_o(rid), .irq_o(irq),
    .reg_req_i(req), .reg_we_i(we), .reg_addr_i(addr), .reg_wdata_i(wdata),
    .reg_rdata_o(rdata));

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

  // host issues and waits for ready; returns accept
  task automatic issue(logic [31:0] instr, int id, output logic acc);
    @(negedge clk);
    iv = 1; ireq.instr = instr; ireq.rs1 = 32'h1111_0000 + 32'(id);
    ireq.rs2 = 32'h2222_0000 + 32'(id); ireq.rs3 = 32'h3333_0000 + 32'(id); ireq.id = 4'(id);
    #1 while (!ir) begin @(negedge clk); #1; end
    acc = iresp.accept;
    @(negedge clk); iv = 0;
  endtask

  // the eCPU side reacts to the interrupt
  logic [31:0] dec_value;
  initial begin
    logic [31:0] st, d;
    forever begin
      @(negedge clk);
      if (irq) begin
        rd(5, st);
        if (st[0]) begin
          rd(0, d); check(d[6:0] == OPC_XMNMC, "eCPU sees opcode");
          rd(1, d); check(d[31:16] == 16'h1111, "eCPU sees rs1");
          rd(3, d); check(d[31:16] == 16'h3333, "eCPU sees rs3");
          repeat (3) @(negedge clk);
          wr(6, dec_value);
        end else if (st[1] || st[2]) begin
          wr(7, 0);
        end
      end
    end
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic acc;
    iv = 0; ireq = '0; cv = 0; com = '0; rr = 1; req = 0; we = 0; addr = 0; wdata = 0;
    dec_value = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // foreign opcode: refused in the same cycle, no interrupt
    @(negedge clk); iv = 1; ireq.instr = 32'h0000_0033;
    #1 check(ir && !iresp.accept && !irq, "foreign opcode refused at once");
    @(negedge clk); iv = 0;
    // accept and commit
    dec_value = 32'b11;
    issue({5'd0, 20'd0, OPC_XMNMC}, 3, acc);
    check(acc, "accepted by eCPU decision");
    @(negedge clk); cv = 1; com.id = 3; com.kill = 0;
    @(negedge clk); cv = 0;
    #1 check(rv && rid == 3, "result returned after commit");
    @(negedge clk);
    repeat (20) @(negedge clk);
    check(!irq, "commit acknowledged, bridge idle");
    // reject by eCPU
    dec_value = 32'b01;
    issue({5'd9, 20'd0, OPC_XMNMC}, 4, acc);
    check(!acc, "refused by eCPU decision");
    repeat (5) @(negedge clk);
    check(!irq && !rv, "idle after refusal");
    // accept then kill
    dec_value = 32'b11;
    issue({5'd1, 20'd0, OPC_XMNMC}, 5, acc);
    check(acc, "accepted before kill");
    @(negedge clk); cv = 1; com.id = 5; com.kill = 1;
    @(negedge clk); cv = 0;
    #1 check(irq && !rv, "kill reported to eCPU, no result");
    repeat (20) @(negedge clk);
    check(!irq, "kill acknowledged");
    // next issue works again
    issue({5'd2, 20'd0, OPC_XMNMC}, 6, acc);
    check(acc, "bridge usable after kill");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
