// tb_llc_ctl: the cache controller with its HW DMA, an external memory model
// and a word model of the VRFs, on an 8-line cache. Checks: read miss refill
// data, single-cycle hits, write hits and dirty eviction (the written word
// reaches memory), the approximate-LRU victim, the eCPU lock (grant, host
// stalled, DMA still served), WAR and RAW stalls from Address Table entries,
// direct VRF access by the DMA port that writes a dirty line back and takes
// it out of the cache, release of busy lines, and DMA cached reads.
module tb_llc_ctl;
  import arcane_pkg::*;
  localparam int unsigned LINES = 8, NUM_VPU = 2, WW = $clog2(LINES * LINE_WORDS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t hreq, dreq, ereq;
  bus_rsp_t hrsp, drsp, ersp;
  logic lock_req, lock_gnt, rel;
  logic [2:0] rel_first, rel_last;
  logic [NUM_VPU-1:0][3:0] dcnt;
  logic at_req, at_we;
  logic [7:0] at_addr;
  logic [31:0] at_wdata, at_rdata;
  logic hv, hr, hd;
  hdma_cmd_t hcmd;
  logic hv_req, hv_we, hv_gnt, hv_rvalid;
  logic [WW-1:0] hv_addr;
  logic [31:0] hv_wdata, hv_rdata;
  logic v_req, v_we, v_gnt, v_rvalid;
  logic [3:0] v_be;
  logic [WW-1:0] v_addr;
  logic [31:0] v_wdata, v_rdata;
  llc_ev_t ev;
  logic [31:0] vmem [LINES * LINE_WORDS];
  int n_hit, n_miss, n_wb, n_lock, n_war, n_dst, n_claim;

  llc_ctl #(.LINES(LINES), .NUM_VPU(NUM_VPU), .AT_ENTRIES(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .host_req_i(hreq), .host_rsp_o(hrsp), .dma_req_i(dreq),
    .dma_rsp_o(drsp), .lock_req_i(lock_req), .lock_gnt_o(lock_gnt), .release_i(rel),
    .release_first_i(rel_first), .release_last_i(rel_last), .dirty_cnt_o(dcnt),
    .at_req_i(at_req), .at_we_i(at_we), .at_addr_i(at_addr), .at_wdata_i(at_wdata),
    .at_rdata_o(at_rdata), .hdma_valid_o(hv), .hdma_ready_i(hr), .hdma_cmd_o(hcmd),
    .hdma_done_i(hd), .hdma_vrf_req_i(hv_req), .hdma_vrf_we_i(hv_we), .hdma_vrf_addr_i(hv_addr),
    .hdma_vrf_wdata_i(hv_wdata), .hdma_vrf_gnt_o(hv_gnt), .hdma_vrf_rvalid_o(hv_rvalid),
    .hdma_vrf_rdata_o(hv_rdata), .vrf_req_o(v_req), .vrf_we_o(v_we), .vrf_be_o(v_be),
    .vrf_addr_o(v_addr), .vrf_wdata_o(v_wdata), .vrf_gnt_i(v_gnt), .vrf_rvalid_i(v_rvalid),
    .vrf_rdata_i(v_rdata), .ev_o(ev));

  hw_dma #(.LINES(LINES)) u_hdma (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(hv), .cmd_ready_o(hr), .cmd_i(hcmd), .done_o(hd),
    .vrf_req_o(hv_req), .vrf_we_o(hv_we), .vrf_addr_o(hv_addr), .vrf_wdata_o(hv_wdata),
    .vrf_gnt_i(hv_gnt), .vrf_rvalid_i(hv_rvalid), .vrf_rdata_i(hv_rdata), .mem_req_o(ereq),
    .mem_rsp_i(ersp));

  ext_mem_model #(.WORDS(65536), .MAX_WAIT(1)) u_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(ereq),
                                                      .rsp_o(ersp));

  // VRF word model, always granted, one-cycle reads
  assign v_gnt = v_req;
  always_ff @(posedge clk) begin
    v_rvalid <= v_req && !v_we;
    if (v_req && v_we)
      for (int b = 0; b < 4; b++) if (v_be[b]) vmem[v_addr][8*b +: 8] <= v_wdata[8*b +: 8];
    if (v_req && !v_we) v_rdata <= vmem[v_addr];
  end

  always_ff @(posedge clk) begin
    n_hit   <= n_hit + int'(ev.hit);
    n_miss  <= n_miss + int'(ev.miss);
    n_wb    <= n_wb + int'(ev.writeback);
    n_lock  <= n_lock + int'(ev.lock_stall);
    n_war   <= n_war + int'(ev.war_stall);
    n_dst   <= n_dst + int'(ev.dst_stall);
    n_claim <= n_claim + int'(ev.claim);
  end

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // one host access; returns read data and the cycles waited for the grant
  task automatic host(bit we, logic [31:0] a, logic [31:0] d, output logic [31:0] rd,
                      output int wait_cyc);
    @(negedge clk);
    hreq.req = 1; hreq.we = we; hreq.addr = a; hreq.wdata = d; hreq.be = 4'hf;
    wait_cyc = 0;
    #1 while (!hrsp.gnt) begin @(negedge clk); #1 wait_cyc++; end
    @(negedge clk); hreq.req = 0;
    rd = hrsp.rdata;
    if (!we) check(hrsp.rvalid, "host rvalid one cycle after grant");
  endtask

  task automatic dma(bit we, logic [31:0] a, logic [31:0] d, output logic [31:0] rd);
    @(negedge clk);
    dreq.req = 1; dreq.we = we; dreq.addr = a; dreq.wdata = d; dreq.be = 4'hf;
    #1 while (!drsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk); dreq.req = 0;
    rd = drsp.rdata;
  endtask

  task automatic at_write(int a, logic [31:0] d);
    @(negedge clk); at_req = 1; at_we = 1; at_addr = 8'(a); at_wdata = d;
    @(negedge clk); at_req = 0; at_we = 0;
  endtask

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam logic [31:0] BASE = 32'h0001_0000;

  initial begin
    logic [31:0] r;
    int w;
    hreq = '0; dreq = '0; lock_req = 0; rel = 0; rel_first = 0; rel_last = 0;
    at_req = 0; at_we = 0; at_addr = 0; at_wdata = 0;
    n_hit = 0; n_miss = 0; n_wb = 0; n_lock = 0; n_war = 0; n_dst = 0; n_claim = 0;
    repeat (2) @(negedge clk); rst_n = 1;

    // 1. read miss, then hit
    host(0, BASE + 32'h24, 0, r, w);
    check(r == u_mem.init_word((BASE + 32'h24) >> 2), "miss refill data");
    check(w > 3 * LINE_WORDS, "miss waits for the refill");
    host(0, BASE + 32'h3FC, 0, r, w);
    check(r == u_mem.init_word((BASE + 32'h3FC) >> 2) && w == 0, "hit in the same cycle");
    // 2. write hit then read back
    host(1, BASE + 32'h40, 32'hDEAD_BEEF, r, w);
    check(w == 0, "write hit granted at once");
    host(0, BASE + 32'h40, 0, r, w);
    check(r == 32'hDEAD_BEEF, "write hit read back");
    check(dcnt[0] == 1, "one dirty line");
    // 3. fill remaining lines, then evict the LRU (the dirty first line)
    for (int i = 1; i < LINES; i++) host(0, BASE + 32'(i) * 1024, 0, r, w);
    check(n_miss == LINES, "one miss per line");
    host(0, BASE + 32'(LINES) * 1024, 0, r, w);
    check(r == u_mem.init_word((BASE + 32'(LINES) * 1024) >> 2), "refill after eviction");
    check(n_wb == 1, "dirty victim written back");
    check(u_mem.mem[(BASE + 32'h40) >> 2] == 32'hDEAD_BEEF, "written word reached memory");
    host(0, BASE + 32'h40, 0, r, w);
    check(r == 32'hDEAD_BEEF, "evicted line refilled with its new data");

    // 4. lock
    @(negedge clk); lock_req = 1;
    repeat (2) @(negedge clk);
    check(lock_gnt, "lock granted when host idle");
    fork
      host(0, BASE + 32'h40, 0, r, w);
      begin
        repeat (5) @(negedge clk);
        begin
          logic [31:0] dr;
          dma(0, BASE + 32'h44, 0, dr);
          check(dr == u_mem.init_word((BASE + 32'h44) >> 2), "DMA served under lock");
        end
        repeat (5) @(negedge clk);
        lock_req = 0;
      end
    join
    check(w >= 10 && r == 32'hDEAD_BEEF, "host stalled by lock until release");
    check(n_lock >= 10, "lock stalls counted");

    // 5. hazards: source busy on line 1, destination busy on line 2
    at_write(0, BASE + 32'(1 * 1024)); at_write(1, BASE + 32'(1 * 1024) + 255); at_write(2, 32'b011);
    at_write(4, BASE + 32'(2 * 1024)); at_write(5, BASE + 32'(2 * 1024) + 1023); at_write(6, 32'b111);
    host(0, BASE + 32'(1 * 1024) + 8, 0, r, w);
    check(n_war == 0 && r == u_mem.init_word((BASE + 1024 + 8) >> 2), "load from busy source allowed");
    host(0, BASE + 32'(1 * 1024) + 12, 0, r, w);
    check(w == 1 && r == u_mem.init_word((BASE + 1024 + 12) >> 2),
          "hit on an operand line spends one cycle on the AT lookup");
    fork
      host(1, BASE + 32'(1 * 1024) + 8, 32'h1234, r, w);
      begin repeat (20) @(negedge clk); at_write(2, 32'b001); end
    join
    check(w >= 20 && n_war >= 20, "store to busy source stalled (WAR)");
    host(1, BASE + 32'(1 * 1024) + 256, 32'h99, r, w);
    check(w == 1, "store next to the operand range proceeds after the lookup cycle");
    host(0, BASE + 32'(5 * 1024), 0, r, w);
    host(0, BASE + 32'(5 * 1024) + 4, 0, r, w);
    check(w == 0 && r == u_mem.init_word((BASE + 5 * 1024 + 4) >> 2),
          "hit on an ordinary line granted in the request cycle");
    fork
      host(0, BASE + 32'(2 * 1024) + 4, 0, r, w);
      begin repeat (15) @(negedge clk); at_write(6, 32'b101); end
    join
    check(w >= 15 && n_dst >= 15, "load from busy destination stalled (RAW)");

    // 6. DMA direct access to the VRF line holding BASE+1024 (dirty)
    begin
      int line;
      logic [31:0] dr;
      line = int'(dut.lk_line);
      for (int i = 0; i < LINES; i++)
        if (dut.u_ct.ct_q[i].valid && dut.u_ct.ct_q[i].tag == (BASE + 1024) >> 10) line = i;
      dma(1, VRF_BASE + 32'(line) * 1024 + 12, 32'hC0FFEE, dr);
      check(n_claim >= 1, "line claimed for computing");
      check(u_mem.mem[(BASE + 1024 + 8) >> 2] == 32'h1234, "dirty line written back before claim");
      check(vmem[line * LINE_WORDS + 3] == 32'hC0FFEE, "DMA wrote the vector register");
      check(dut.u_ct.ct_q[line].busy && !dut.u_ct.ct_q[line].valid, "claimed line busy");
      dma(0, VRF_BASE + 32'(line) * 1024 + 12, 0, dr);
      check(dr == 32'hC0FFEE, "DMA reads the vector register");
      host(0, BASE + 1024 + 8, 0, r, w);
      check(r == 32'h1234 && w > 0, "host re-fetches the claimed address from memory");
      check(!dut.u_ct.ct_q[line].valid, "busy line not used for the refill");
      @(negedge clk); rel = 1; rel_first = 3'(line); rel_last = 3'(line);
      @(negedge clk); rel = 0;
      check(!dut.u_ct.ct_q[line].busy, "line released");
    end
    // 7. DMA cached read, miss path, sd flag
    begin
      logic [31:0] dr;
      dma(0, 32'h0003_0010, 0, dr);
      check(dr == u_mem.init_word(32'h0003_0010 >> 2), "DMA cached read on miss");
      host(0, 32'h0003_0010, 0, r, w);
      check(n_hit > 0 && r == dr, "host hit on the DMA-filled line");
    end
    $display("hits=%0d misses=%0d writebacks=%0d lock=%0d war=%0d dst=%0d claims=%0d",
             n_hit, n_miss, n_wb, n_lock, n_war, n_dst, n_claim);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
