// tb_arcane_top: end-to-end test of the whole LLC at its default size
// (4 VPUs x 32 KiB, 4 lanes, 128 lines of 1 KiB, 16 KiB eMEM). The testbench
// plays the host CPU (cache port, configuration port, coprocessor interface)
// and the eCPU firmware (controller-bus accesses and vector issue), and
// provides the external memory.
//
// Scenario:
//  1. firmware words uploaded by the host into eMEM and fetched back by the eCPU
//  2. the host writes a 64-word matrix A and dirties 140 other lines, which
//     forces misses, approximate-LRU evictions and dirty write-backs
//  3. the host offloads a custom-2 kernel instruction; the eCPU decodes it,
//     accepts it, the host commits and gets its result
//  4. the eCPU registers A (source) and R (destination) in the Address Table,
//     picks the VPU with the fewest dirty lines, takes the lock, moves A into
//     a vector register with the 2D SW DMA, claims the temporary and result
//     registers with one-word DMA writes, frees the source, drops the lock,
//     runs a 3-tap convolution with leaky ReLU (slides, scalar MACs, shift,
//     max) on the VPU, then takes the lock again, writes R back into the cache
//     (fetch-on-write), releases the lines and the operands
//  5. meanwhile the host stores into A (WAR stall, then a lock stall while the
//     eCPU holds the lock) and then loads R (RAW stall until R is written back)
//  6. a second offload is killed by the host, a third refused by the eCPU
// R and all host-visible data are checked against values computed here, and
// every mechanism above must have occurred at least once.
module tb_arcane_top;
  import arcane_pkg::*;
  localparam int unsigned LINES = CFG_LINES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t host_req, hcfg_req, if_req, dat_req, ext_req;
  bus_rsp_t host_rsp, hcfg_rsp, if_rsp, dat_rsp, ext_rsp;
  logic xiv, xir, xcv, xrv, xrr;
  xif_issue_req_t xreq;
  xif_issue_resp_t xresp;
  xif_commit_t xcom;
  logic [3:0] xrid;
  logic [1:0] irq;
  logic evv, evr, eva;
  logic [31:0] ev_instr, ev_rs1, ev_rs2;
  llc_ev_t ev;

  arcane_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .host_req_i(host_req), .host_rsp_o(host_rsp), .hcfg_req_i(hcfg_req), .hcfg_rsp_o(hcfg_rsp),
    .x_issue_valid_i(xiv), .x_issue_ready_o(xir), .x_issue_req_i(xreq), .x_issue_resp_o(xresp),
    .x_commit_valid_i(xcv), .x_commit_i(xcom), .x_result_valid_o(xrv), .x_result_ready_i(xrr),
    .x_result_id_o(xrid), .ecpu_irq_o(irq), .ecpu_ifetch_req_i(if_req), .ecpu_ifetch_rsp_o(if_rsp),
    .ecpu_data_req_i(dat_req), .ecpu_data_rsp_o(dat_rsp), .ecpu_x_valid_i(evv),
    .ecpu_x_ready_o(evr), .ecpu_x_accept_o(eva), .ecpu_x_instr_i(ev_instr),
    .ecpu_x_rs1_i(ev_rs1), .ecpu_x_rs2_i(ev_rs2), .ext_req_o(ext_req), .ext_rsp_i(ext_rsp),
    .llc_ev_o(ev));

  ext_mem_model #(.WORDS(65536), .MAX_WAIT(1)) u_mem (.clk_i(clk), .rst_ni(rst_n),
                                                      .req_i(ext_req), .rsp_o(ext_rsp));

  // ---------------- mechanism counters ----------------
  int n_hit, n_miss, n_wb, n_lock, n_war, n_dst, n_claim, n_at;
  int n_commit, n_kill, n_reject, n_vec, n_slide, n_macc, n_dma;
  always_ff @(posedge clk) begin
    n_hit   <= n_hit + int'(ev.hit);
    n_miss  <= n_miss + int'(ev.miss);
    n_wb    <= n_wb + int'(ev.writeback);
    n_lock  <= n_lock + int'(ev.lock_stall);
    n_war   <= n_war + int'(ev.war_stall);
    n_dst   <= n_dst + int'(ev.dst_stall);
    n_claim <= n_claim + int'(ev.claim);
    n_at    <= n_at + int'(ev.at_lookup);
  end

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- host side ----------------
  task automatic host(bit we, logic [31:0] a, logic [31:0] d, output logic [31:0] rd,
                      output int wait_cyc);
    @(negedge clk);
    host_req.req = 1; host_req.we = we; host_req.addr = a; host_req.wdata = d;
    host_req.be = 4'hf;
    wait_cyc = 0;
    #1 while (!host_rsp.gnt) begin @(negedge clk); #1 wait_cyc++; end
    @(negedge clk); host_req.req = 0;
    rd = host_rsp.rdata;
  endtask

  task automatic hcfg_write(logic [31:0] a, logic [31:0] d);
    @(negedge clk); hcfg_req.req = 1; hcfg_req.we = 1; hcfg_req.addr = a; hcfg_req.wdata = d;
    hcfg_req.be = 4'hf;
    #1 while (!hcfg_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk); hcfg_req.req = 0;
  endtask

  // host offload: hold issue_valid until ready, return accept
  task automatic offload(logic [4:0] func5, logic [3:0] id, output logic acc);
    @(negedge clk);
    xiv = 1; xreq.instr = {5'd3, 2'b00, 5'd2, 5'd1, 3'b010, func5, OPC_XMNMC};
    xreq.rs1 = 32'h0000_0000; xreq.rs2 = 32'h0000_0002; xreq.rs3 = 32'h0000_0001; xreq.id = id;
    #1 while (!xir) begin @(negedge clk); #1; end
    acc = xresp.accept;
    @(negedge clk); xiv = 0;
  endtask

  // ---------------- eCPU side ----------------
  task automatic ecpu_wr(logic [31:0] a, logic [31:0] d);
    @(negedge clk); dat_req.req = 1; dat_req.we = 1; dat_req.addr = a; dat_req.wdata = d;
    dat_req.be = 4'hf;
    @(negedge clk); dat_req.req = 0; dat_req.we = 0;
  endtask
  task automatic ecpu_rd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); dat_req.req = 1; dat_req.we = 0; dat_req.addr = a;
    @(negedge clk); dat_req.req = 0; d = dat_rsp.rdata;
    check(dat_rsp.rvalid, "eCPU read answered");
  endtask
  task automatic ecpu_vec(vop_e op, bit vx, sew_e sew, int vd, int vs1, int vs2,
                          logic [31:0] scalar, int vl, int vpu);
    @(negedge clk);
    evv = 1; ev_instr = {6'(op), vx, 5'(vs2), 5'(vs1), 3'(sew), 5'(vd), OPC_VEC};
    ev_rs1 = scalar; ev_rs2 = {12'd0, 4'(1 << vpu), 16'(vl)};
    #1 while (!evr) begin @(negedge clk); #1; end
    check(eva, "vector instruction accepted");
    n_vec++;
    if (op == VSLIDEDN) n_slide++;
    if (op == VMACC) n_macc++;
    @(negedge clk); evv = 0;
  endtask
  task automatic ecpu_wait_vpu_idle();
    logic [31:0] d;
    do ecpu_rd(CFG_BASE + 8, d); while (d != 0);
  endtask
  task automatic ecpu_lock();
    logic [31:0] d;
    ecpu_wr(CFG_BASE + 0, 1);
    do ecpu_rd(CFG_BASE + 0, d); while (!d[1]);
  endtask
  task automatic ecpu_unlock();
    ecpu_wr(CFG_BASE + 0, 0);
  endtask
  task automatic ecpu_dma(logic [31:0] src, logic [31:0] dst, int sstride, int dstride,
                          int width, int height);
    ecpu_wr(SWDMA_BASE + 0, src);
    ecpu_wr(SWDMA_BASE + 4, dst);
    ecpu_wr(SWDMA_BASE + 8, 32'(sstride));
    ecpu_wr(SWDMA_BASE + 12, 32'(dstride));
    ecpu_wr(SWDMA_BASE + 16, 32'(width));
    ecpu_wr(SWDMA_BASE + 20, 32'(height));
    ecpu_wr(SWDMA_BASE + 24, 1);
    while (!irq[1]) @(negedge clk);
    ecpu_wr(SWDMA_BASE + 28, 0);
    n_dma++;
  endtask
  task automatic ecpu_at(int e, logic [31:0] s, logic [31:0] en, logic [2:0] ctl);
    ecpu_wr(AT_BASE + 32'(16 * e), s);
    ecpu_wr(AT_BASE + 32'(16 * e) + 4, en);
    ecpu_wr(AT_BASE + 32'(16 * e) + 8, 32'(ctl));
  endtask
  // interrupt handler part of the software decoder: accept known kernels
  task automatic ecpu_decode(output logic [31:0] instr);
    logic [31:0] st, d;
    while (!irq[0]) @(negedge clk);
    ecpu_rd(BRIDGE_BASE + 20, st);
    check(st[0], "bridge reports a pending instruction");
    ecpu_rd(BRIDGE_BASE + 0, instr);
    ecpu_rd(BRIDGE_BASE + 8, d);
    check(d == 32'h2, "eCPU reads rs2 of the offload");
    ecpu_wr(BRIDGE_BASE + 24, (instr[11:7] <= 5'd4) ? 32'b11 : 32'b01);
  endtask

  // ---------------- reference data ----------------
  localparam logic [31:0] A_ADDR = 32'h0000_1000, R_ADDR = 32'h0000_3000;
  localparam logic [31:0] FILL = 32'h0001_0000;
  localparam int NF = LINES + 12;
  logic signed [31:0] a_val [64];
  logic signed [31:0] r_ref [64];
  int signed taps [3] = '{2, -1, 3};

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] r, instr, d;
    logic acc;
    int w, vpu, best, line_a, w_war, w_dst;
    logic [31:0] r_war, r_dst;
    logic at_done;
    at_done = 0;
    host_req = '0; hcfg_req = '0; if_req = '0; dat_req = '0; xiv = 0; xreq = '0; xcv = 0;
    xcom = '0; xrr = 1; evv = 0; ev_instr = 0; ev_rs1 = 0; ev_rs2 = 0;
    n_hit = 0; n_miss = 0; n_wb = 0; n_lock = 0; n_war = 0; n_dst = 0; n_claim = 0; n_at = 0;
    n_commit = 0; n_kill = 0; n_reject = 0; n_vec = 0; n_slide = 0; n_macc = 0; n_dma = 0;
    for (int i = 0; i < 64; i++) a_val[i] = 32'(i * 37 % 101) - 50;
    for (int i = 0; i < 64; i++) begin
      longint acc_l;
      acc_l = 0;
      for (int k = 0; k < 3; k++) if (i + k < 64) acc_l += taps[k] * a_val[i + k];
      r_ref[i] = 32'(acc_l);
      if (r_ref[i] < 0) r_ref[i] = r_ref[i] >>> 2;
    end
    repeat (3) @(negedge clk); rst_n = 1;

    // 1. firmware upload and fetch
    for (int i = 0; i < 16; i++) hcfg_write(EMEM_BASE + 32'(4 * i), 32'h0000_0013 + 32'(i << 20));
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); if_req.req = 1; if_req.addr = 32'(4 * i);
      @(negedge clk); if_req.req = 0;
      check(if_rsp.rvalid && if_rsp.rdata == 32'h0000_0013 + 32'(i << 20), "firmware fetch");
    end

    // 2. matrix A and filler traffic
    for (int i = 0; i < 64; i++) host(1, A_ADDR + 32'(4 * i), a_val[i], r, w);
    for (int i = 0; i < NF; i++) host(1, FILL + 32'(i * 1024) + 32'(4 * (i % 256)), 32'(i) ^ 32'hF00D_0000, r, w);
    check(n_miss >= NF + 1, "misses for every new line");
    check(n_wb >= NF + 1 - LINES, "dirty lines written back on eviction");
    for (int i = 0; i < 4; i++)
      check(u_mem.mem[(FILL + 32'(i * 1024) + 32'(4 * (i % 256))) >> 2] == (32'(i) ^ 32'hF00D_0000),
            "evicted dirty data in memory");
    host(1, A_ADDR, a_val[0], r, w);   // bring A back in, dirty again

    // 3. offload, decode, commit
    fork
      offload(5'd4, 4'd1, acc);
      ecpu_decode(instr);
    join
    check(acc, "kernel offload accepted");
    check(instr[6:0] == OPC_XMNMC && instr[11:7] == 5'd4, "bridge sampled opcode and func5");
    @(negedge clk); xcv = 1; xcom.id = 4'd1; xcom.kill = 0;
    @(negedge clk); xcv = 0;
    #1 check(xrv && xrid == 4'd1, "host gets the result after commit");
    n_commit++;
    ecpu_rd(BRIDGE_BASE + 20, d);
    check(d[1], "eCPU sees the commit");
    ecpu_wr(BRIDGE_BASE + 28, 0);

    // 4./5. kernel execution with concurrent host traffic
    ecpu_at(0, A_ADDR, A_ADDR + 255, 3'b011);    // source, busy
    ecpu_at(1, R_ADDR, R_ADDR + 255, 3'b111);    // destination, busy
    best = 1000; vpu = 0;
    for (int v = 0; v < CFG_NUM_VPU; v++) begin
      ecpu_rd(CFG_BASE + 32'(16 + 4 * v), d);
      if (int'(d) < best) begin best = int'(d); vpu = v; end
    end
    line_a = vpu * CFG_VREGS;          // A in vreg 0, T in vreg 1, R in vreg 2
    fork
      begin   // host: store into the busy source, then load the busy destination
        wait (at_done);
        host(1, A_ADDR + 20, 32'h7777_7777, r_war, w_war);
        host(0, R_ADDR + 8, 0, r_dst, w_dst);
      end
      begin   // eCPU
        at_done = 1;
        repeat (40) @(negedge clk);
        ecpu_lock();
        ecpu_dma(A_ADDR, VRF_BASE + 32'(line_a) * 1024, 32, 32, 8, 8);
        // claim the temporary and destination registers (written back if dirty)
        ecpu_dma(A_ADDR, VRF_BASE + 32'(line_a + 1) * 1024, 4, 4, 1, 1);
        ecpu_dma(A_ADDR, VRF_BASE + 32'(line_a + 2) * 1024, 4, 4, 1, 1);
        ecpu_at(0, A_ADDR, A_ADDR + 255, 3'b001);   // source allocated
        ecpu_unlock();
        ecpu_vec(VMV, 1, SEW32, 2, 0, 0, 0, 64, vpu);
        for (int k = 0; k < 3; k++) begin
          ecpu_vec(VSLIDEDN, 0, SEW32, 1, 0, 0, 32'(k), 64, vpu);
          ecpu_vec(VMACC, 1, SEW32, 2, 1, 0, 32'(taps[k]), 64, vpu);
        end
        ecpu_vec(VSRA, 1, SEW32, 1, 2, 0, 32'd2, 64, vpu);
        ecpu_vec(VMAX, 0, SEW32, 2, 2, 1, 0, 64, vpu);
        ecpu_wait_vpu_idle();
        ecpu_lock();
        ecpu_dma(VRF_BASE + 32'(line_a + 2) * 1024, R_ADDR, 256, 256, 64, 1);
        ecpu_unlock();
        ecpu_wr(CFG_BASE + 4, {16'(line_a + 2), 16'(line_a)});
        ecpu_at(1, R_ADDR, R_ADDR + 255, 3'b000);
        ecpu_at(0, A_ADDR, A_ADDR + 255, 3'b000);
      end
    join
    check(w_war > 0, "store to the busy source waited");
    check(w_dst > 0 && r_dst == r_ref[2], "load of the destination waited for the result");
    for (int i = 0; i < 64; i++) begin
      host(0, R_ADDR + 32'(4 * i), 0, r, w);
      check(r == r_ref[i], $sformatf("R[%0d] = %0d expected %0d", i, $signed(r), r_ref[i]));
    end
    host(0, A_ADDR + 20, 0, r, w);
    check(r == 32'h7777_7777, "host store to A landed after allocation");
    host(0, A_ADDR + 24, 0, r, w);
    check(r == a_val[6], "rest of A intact");
    for (int i = 0; i < NF; i++) begin
      host(0, FILL + 32'(i * 1024) + 32'(4 * (i % 256)), 0, r, w);
      check(r == (32'(i) ^ 32'hF00D_0000), "filler data survives eviction and refill");
    end

    // 6. kill and refusal
    fork
      offload(5'd1, 4'd2, acc);
      ecpu_decode(instr);
    join
    check(acc, "second offload accepted");
    @(negedge clk); xcv = 1; xcom.id = 4'd2; xcom.kill = 1;
    @(negedge clk); xcv = 0;
    ecpu_rd(BRIDGE_BASE + 20, d);
    check(d[2] && !xrv, "kill reported, no result");
    ecpu_wr(BRIDGE_BASE + 28, 0);
    n_kill++;
    fork
      offload(5'd20, 4'd3, acc);
      ecpu_decode(instr);
    join
    check(!acc, "unknown kernel refused by the software decoder");
    n_reject++;

    $display("hits=%0d misses=%0d writebacks=%0d lock_stalls=%0d war=%0d raw=%0d claims=%0d at_lookups=%0d",
             n_hit, n_miss, n_wb, n_lock, n_war, n_dst, n_claim, n_at);
    $display("commits=%0d kills=%0d rejects=%0d vec=%0d slides=%0d maccs=%0d dma=%0d vpu=%0d",
             n_commit, n_kill, n_reject, n_vec, n_slide, n_macc, n_dma, vpu);
    check(n_hit > 0, "hit happened");
    check(n_miss > 0, "miss happened");
    check(n_wb > 0, "write-back happened");
    check(n_lock > 0, "lock stall happened");
    check(n_war > 0, "WAR stall happened");
    check(n_dst > 0, "RAW stall happened");
    check(n_claim > 0, "line claim happened");
    check(n_at > 0, "AT lookup happened");
    check(n_commit > 0 && n_kill > 0 && n_reject > 0, "commit, kill and refusal happened");
    check(n_slide > 0 && n_macc > 0 && n_dma > 0, "slides, MACs and DMA transfers happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
