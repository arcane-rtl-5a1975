// tb_conv_layer: runs the 3-channel 2D convolution layer (convolution over
// three input channels, ReLU, 2x2 max-pooling) end to end on the full-size LLC
// (default parameters, 4 VPUs x 4 lanes), for int32, int16 and int8 data.
// The testbench acts as host and as the eCPU firmware, in the order a kernel
// runtime would:
//   host   : writes the N x N x 3 input (elements packed into 32-bit words)
//            through the cache, offloads a kernel instruction (custom-2,
//            func5 = 4) and commits it
//   eCPU   : accepts it, registers input (source) and output (destination) in
//            the Address Table, picks the VPU with the fewest dirty lines,
//            locks the cache, moves each channel into a vector register with
//            a 2D DMA (one DMA row per image row), claims an accumulator and a
//            temporary register, frees the source, unlocks
//   VPU    : acc = 0; for every channel c and tap (i, j):
//              tmp = slide_down(ch_c, i*N + j elements); acc += f[c][i][j] * tmp
//            acc = max(acc, 0); then two slide+max steps build the 2x2 pool
//   eCPU   : locks again and writes the result back into the cache
//            (fetch-on-write): int32 results are gathered into a dense P x P
//            array with strided DMAs; packed 8/16-bit results go back as the
//            even image rows, since the DMA moves whole words. It then
//            releases the lines and clears the Address Table entries
//   host   : reads the output, which is compared with a reference computed
//            here (wrapping at the element width, as the VPU does). The VPU
//            time of the convolution is checked against the unit's cost model
//            (per row of LANES words: 2 cycles for a word-aligned slide, 3 for
//            an unaligned one, 3 for a scalar MAC) plus a small issue overhead.
// Sizes: N = 8, 16 (and 32 for int8) with 3x3, 5x5 and 7x7 filters, i.e. every
// size at which one channel fits one 1 KiB vector register. Larger inputs
// need the row-band tiling done by the runtime and are not run here.
module tb_conv_layer;
  import arcane_pkg::*;
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

  // {N, F, element bytes}
  int sizes [21][3] = '{'{8, 3, 4}, '{8, 5, 4}, '{8, 7, 4}, '{16, 3, 4}, '{16, 5, 4}, '{16, 7, 4},
                        '{8, 3, 2}, '{8, 5, 2}, '{8, 7, 2}, '{16, 3, 2}, '{16, 5, 2}, '{16, 7, 2},
                        '{8, 3, 1}, '{8, 5, 1}, '{8, 7, 1}, '{16, 3, 1}, '{16, 5, 1}, '{16, 7, 1},
                        '{32, 3, 1}, '{32, 5, 1}, '{32, 7, 1}};
  int n_hit, n_miss, n_claim, n_dst;
  always_ff @(posedge clk) begin
    n_hit   <= n_hit + int'(ev.hit);
    n_miss  <= n_miss + int'(ev.miss);
    n_claim <= n_claim + int'(ev.claim);
    n_dst   <= n_dst + int'(ev.dst_stall);
  end

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- host side ----------------
  task automatic host(bit we, logic [31:0] a, logic [31:0] d, output logic [31:0] rd);
    @(negedge clk);
    host_req.req = 1; host_req.we = we; host_req.addr = a; host_req.wdata = d;
    host_req.be = 4'hf;
    #1 while (!host_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk); host_req.req = 0;
    rd = host_rsp.rdata;
  endtask
  task automatic offload(logic [4:0] func5, logic [3:0] id, output logic acc);
    @(negedge clk);
    xiv = 1; xreq.instr = {5'd3, 2'b00, 5'd2, 5'd1, 3'b010, func5, OPC_XMNMC};
    xreq.rs1 = 32'h0001_0000; xreq.rs2 = 32'h0000_0002; xreq.rs3 = 32'h0000_0000; xreq.id = id;
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
  endtask
  int n_vec;
  task automatic ecpu_vec(vop_e op, bit vx, sew_e sew, int vd, int vs1, int vs2,
                          logic [31:0] scalar, int vl, int vpu);
    @(negedge clk);
    evv = 1; ev_instr = {6'(op), vx, 5'(vs2), 5'(vs1), 3'(sew), 5'(vd), OPC_VEC};
    ev_rs1 = scalar; ev_rs2 = {12'd0, 4'(1 << vpu), 16'(vl)};
    #1 while (!evr) begin @(negedge clk); #1; end
    if (!eva) check(0, "vector instruction accepted");
    n_vec++;
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
  endtask
  task automatic ecpu_at(int e, logic [31:0] s, logic [31:0] en, logic [2:0] ctl);
    ecpu_wr(AT_BASE + 32'(16 * e), s);
    ecpu_wr(AT_BASE + 32'(16 * e) + 4, en);
    ecpu_wr(AT_BASE + 32'(16 * e) + 8, 32'(ctl));
  endtask

  initial begin
    #400ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // element e of a packed vector of eb-byte elements, sign-extended
  function automatic int unsigned el_word(int e, int eb);
    return (e * eb) / 4;
  endfunction

  // one layer: N x N x 3 input of eb-byte elements at img, output at outp
  task automatic run_layer(int n, int f, int eb, logic [31:0] img, logic [31:0] outp, int id);
    int x [3][32][32];
    int flt [3][7][7];
    int cv [32][32];
    int ref_o [16][16];
    logic [31:0] chw [3][256];
    logic [31:0] r, instr, st;
    logic acc;
    sew_e sew;
    int m, p, vpu, best, base, vl, nw, rows, rw, eb_bits;
    longint t0, t1, model;
    m = n - f + 1;
    p = m / 2;
    vl = n * n;                 // elements per channel
    nw = vl * eb / 4;           // words per channel
    rw = n * eb / 4;            // words per image row
    rows = (nw + CFG_LANES - 1) / CFG_LANES;
    eb_bits = 8 * eb;
    sew = (eb == 1) ? SEW8 : (eb == 2) ? SEW16 : SEW32;
    // data and reference; arithmetic wraps at the element width like the VPU,
    // so the sum is reduced to eb bytes once at the end
    for (int c = 0; c < 3; c++)
      for (int i = 0; i < n; i++)
        for (int j = 0; j < n; j++) x[c][i][j] = int'($urandom_range(200)) - 100;
    for (int c = 0; c < 3; c++)
      for (int i = 0; i < f; i++)
        for (int j = 0; j < f; j++) flt[c][i][j] = int'($urandom_range(10)) - 5;
    for (int c = 0; c < 3; c++)
      for (int w = 0; w < nw; w++)
        for (int b = 0; b < 4; b++) begin
          int e;
          logic [31:0] v;
          e = (4 * w + b) / eb;
          v = 32'(x[c][e / n][e % n]);
          chw[c][w][8 * b +: 8] = v[8 * ((4 * w + b) % eb) +: 8];
        end
    for (int i = 0; i < m; i++)
      for (int j = 0; j < m; j++) begin
        longint s;
        logic [63:0] t;
        s = 0;
        for (int c = 0; c < 3; c++)
          for (int a = 0; a < f; a++)
            for (int b = 0; b < f; b++) s += longint'(flt[c][a][b]) * longint'(x[c][i + a][j + b]);
        t = 64'(s) << (64 - eb_bits);
        s = longint'($signed(t)) >>> (64 - eb_bits);
        cv[i][j] = (s < 0) ? 0 : int'(s);
      end
    for (int i = 0; i < p; i++)
      for (int j = 0; j < p; j++) begin
        ref_o[i][j] = cv[2 * i][2 * j];
        if (cv[2 * i][2 * j + 1] > ref_o[i][j]) ref_o[i][j] = cv[2 * i][2 * j + 1];
        if (cv[2 * i + 1][2 * j] > ref_o[i][j]) ref_o[i][j] = cv[2 * i + 1][2 * j];
        if (cv[2 * i + 1][2 * j + 1] > ref_o[i][j]) ref_o[i][j] = cv[2 * i + 1][2 * j + 1];
      end

    // host writes the input and offloads the layer
    for (int c = 0; c < 3; c++)
      for (int w = 0; w < nw; w++) host(1, img + 32'(4 * (c * nw + w)), chw[c][w], r);
    fork
      offload(5'd4, 4'(id), acc);
      begin   // software decoder in the eCPU's interrupt handler
        while (!irq[0]) @(negedge clk);
        ecpu_rd(BRIDGE_BASE + 0, instr);
        ecpu_wr(BRIDGE_BASE + 24, (instr[6:0] == OPC_XMNMC && instr[11:7] == 5'd4) ? 32'b11 : 32'b01);
      end
    join
    check(acc, "layer offload accepted");
    @(negedge clk); xcv = 1; xcom.id = 4'(id); xcom.kill = 0;
    @(negedge clk); xcv = 0;
    #1 check(xrv && xrid == 4'(id), "host gets the result after commit");
    ecpu_wr(BRIDGE_BASE + 28, 0);

    // allocation
    ecpu_at(0, img, img + 32'(12 * nw - 1), 3'b011);
    ecpu_at(1, outp, outp + 32'(4 * nw - 1), 3'b111);
    best = 1000; vpu = 0;
    for (int v = 0; v < CFG_NUM_VPU; v++) begin
      ecpu_rd(CFG_BASE + 32'(16 + 4 * v), st);
      if (int'(st) < best) begin best = int'(st); vpu = v; end
    end
    base = vpu * CFG_VREGS;    // channels in vregs 0..2, accumulator 3, temporary 4
    ecpu_lock();
    for (int c = 0; c < 3; c++)
      ecpu_dma(img + 32'(4 * c * nw), VRF_BASE + 32'(base + c) * 1024, 4 * rw, 4 * rw, rw, n);
    ecpu_dma(img, VRF_BASE + 32'(base + 3) * 1024, 4, 4, 1, 1);
    ecpu_dma(img, VRF_BASE + 32'(base + 4) * 1024, 4, 4, 1, 1);
    ecpu_at(0, img, img + 32'(12 * nw - 1), 3'b001);
    ecpu_wr(CFG_BASE + 0, 0);

    // convolution, ReLU and 2x2 max-pool on the VPU
    @(negedge clk); t0 = $time / 10;
    model = 0;
    ecpu_vec(VMV, 1, sew, 3, 0, 0, 0, vl, vpu);
    for (int c = 0; c < 3; c++)
      for (int a = 0; a < f; a++)
        for (int b = 0; b < f; b++) begin
          ecpu_vec(VSLIDEDN, 1, sew, 4, c, 0, 32'(a * n + b), vl, vpu);
          ecpu_vec(VMACC, 1, sew, 3, 4, 0, 32'(flt[c][a][b]), vl, vpu);
          model += longint'(rows) * ((((a * n + b) * eb) % 4 == 0) ? 2 + 3 : 3 + 3);
        end
    ecpu_wait_vpu_idle();
    t1 = $time / 10;
    $display("N=%0d F=%0d int%0d: convolution %0d cycles on VPU %0d, unit model %0d + issue",
             n, f, eb_bits, t1 - t0, vpu, model);
    check(t1 - t0 >= model, "convolution not faster than the unit's row model");
    check(t1 - t0 <= model + longint'(rows) + 12 * longint'(6 * f * f + 1) + 40,
          "convolution time within model plus issue overhead");
    ecpu_vec(VMAX, 1, sew, 3, 3, 0, 0, vl, vpu);
    ecpu_vec(VSLIDEDN, 1, sew, 4, 3, 0, 1, vl, vpu);
    ecpu_vec(VMAX, 0, sew, 3, 3, 4, 0, vl, vpu);
    ecpu_vec(VSLIDEDN, 1, sew, 4, 3, 0, 32'(n), vl, vpu);
    ecpu_vec(VMAX, 0, sew, 3, 3, 4, 0, vl, vpu);
    ecpu_wait_vpu_idle();

    // write-back: int32 results are gathered into a dense P x P array (every
    // 2nd word of every 2nd row); packed 8/16-bit results are written back as
    // whole image rows 0, 2, 4, ... (the DMA moves whole words), P rows of N
    ecpu_lock();
    if (eb == 4) begin
      for (int i = 0; i < p; i++)
        ecpu_dma(VRF_BASE + 32'(base + 3) * 1024 + 32'(4 * 2 * i * n), outp + 32'(4 * i * p), 8, 4, 1, p);
    end else begin
      ecpu_dma(VRF_BASE + 32'(base + 3) * 1024, outp, 8 * rw, 4 * rw, rw, p);
    end
    ecpu_wr(CFG_BASE + 0, 0);
    ecpu_wr(CFG_BASE + 4, {16'(base + 4), 16'(base)});
    ecpu_at(1, outp, outp + 32'(4 * nw - 1), 3'b000);
    ecpu_at(0, img, img + 32'(12 * nw - 1), 3'b000);

    // host reads the result
    for (int i = 0; i < p; i++)
      for (int j = 0; j < p; j++) begin
        int ba;
        logic [63:0] t;
        int got;
        ba = (eb == 4) ? 4 * (i * p + j) : (i * n + 2 * j) * eb;
        host(0, outp + 32'(ba & ~3), 0, r);
        t = 64'(r >> (8 * (ba % 4))) << (64 - eb_bits);
        got = int'($signed(t) >>> (64 - eb_bits));
        check(got == ref_o[i][j], $sformatf("N=%0d F=%0d int%0d out[%0d][%0d] = %0d expected %0d",
                                            n, f, eb_bits, i, j, got, ref_o[i][j]));
      end
    for (int i = 0; i < 4; i++) begin   // input still readable and intact
      int w;
      w = (i * 37) % (3 * nw);
      host(0, img + 32'(4 * w), 0, r);
      check(r == chw[w / nw][w % nw], "input intact after the layer");
    end
  endtask

  initial begin
    int id;
    host_req = '0; hcfg_req = '0; if_req = '0; dat_req = '0; xiv = 0; xreq = '0; xcv = 0;
    xcom = '0; xrr = 1; evv = 0; ev_instr = 0; ev_rs1 = 0; ev_rs2 = 0;
    n_hit = 0; n_miss = 0; n_claim = 0; n_dst = 0; n_vec = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    id = 1;
    foreach (sizes[k]) begin
      run_layer(sizes[k][0], sizes[k][1], sizes[k][2], 32'h0002_0000 + 32'(k) * 32'h1000,
                32'h0002_0000 + 32'(k) * 32'h1000 + 32'hC00, id);
      id++;
    end
    $display("hits=%0d misses=%0d claims=%0d vector_instructions=%0d", n_hit, n_miss, n_claim, n_vec);
    check(n_hit > 0 && n_miss > 0 && n_claim > 0, "cache hits, misses and line claims happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
