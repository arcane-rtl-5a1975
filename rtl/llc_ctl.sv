// llc_ctl: the LLC controller ("LLC Ctl" with its FSM, Cache Table and
// Address Table). It serves two request ports, the host system-bus port and
// the SW DMA port, from cache lines that live in the VPUs' vector register
// files, and it owns the subsystem-bus path to the VRFs (its own accesses
// and those of the HW DMA it starts).
//
// Normal mode: fully associative lookup in the cache table. A hit is granted
// in the cycle of the request and read data follow one cycle later (the VRF
// read latency); a busy VRF bank (VPU computing) delays the grant. A miss picks
// an approximate-LRU victim, writes it back through the HW DMA if dirty
// (write-back policy), refills the line and then serves the request as a hit.
// Writes that miss allocate (fetch-on-write).
//
// Locking: while the eCPU holds the lock (lock_req_i, granted by lock_gnt_o
// only when no host operation is in progress) the host port is stalled.
// Hazards: lines carry an "sd" bit when they overlap a registered kernel
// operand; only for such lines on a hit, and always on a miss, is the Address
// Table consulted. On a miss the lookup is combinational (the refill takes
// hundreds of cycles anyway); a hit on an sd line spends one extra cycle
// whose registered lookup result decides between serving and stalling, so
// ordinary hits keep their single-cycle path. A host store into a busy source (WAR) and any host access
// to a busy destination (RAW/WAW) are stalled until the eCPU clears the
// entry's busy flag.
// SW DMA port: addresses in the VRF window (VRF_BASE) reach a vector register
// directly. The first such access to a line takes the line out of the cache
// ("busy computing"): it is written back first if dirty, then invalidated.
// The eCPU gives lines back with release_i. Other DMA addresses are ordinary
// cached accesses, never stalled by lock or hazards, and mark the lines they
// touch as operand lines.
// Bus rule: req must stay high, with stable fields, until gnt; rvalid comes
// for reads only.
// The policies above follow the paper; port priorities (SW DMA before host),
// the lock handshake and all timing details are this design's choices.
module llc_ctl
  import arcane_pkg::*;
#(
  parameter int unsigned LINES      = 128,
  parameter int unsigned NUM_VPU    = 4,
  parameter int unsigned AT_ENTRIES = 16,
  localparam int unsigned LW = $clog2(LINES),
  localparam int unsigned WW = $clog2(LINES * LINE_WORDS),
  localparam int unsigned OW = $clog2(LINE_BYTES)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // host port
  input  bus_req_t        host_req_i,
  output bus_rsp_t        host_rsp_o,
  // SW DMA port
  input  bus_req_t        dma_req_i,
  output bus_rsp_t        dma_rsp_o,
  // lock and line release (configuration register)
  input  logic            lock_req_i,
  output logic            lock_gnt_o,
  input  logic            release_i,
  input  logic [LW-1:0]   release_first_i,
  input  logic [LW-1:0]   release_last_i,
  output logic [NUM_VPU-1:0][LW:0] dirty_cnt_o,
  // Address Table register port
  input  logic            at_req_i,
  input  logic            at_we_i,
  input  logic [7:0]      at_addr_i,
  input  logic [31:0]     at_wdata_i,
  output logic [31:0]     at_rdata_o,
  // HW DMA
  output logic            hdma_valid_o,
  input  logic            hdma_ready_i,
  output hdma_cmd_t       hdma_cmd_o,
  input  logic            hdma_done_i,
  input  logic            hdma_vrf_req_i,
  input  logic            hdma_vrf_we_i,
  input  logic [WW-1:0]   hdma_vrf_addr_i,
  input  logic [31:0]     hdma_vrf_wdata_i,
  output logic            hdma_vrf_gnt_o,
  output logic            hdma_vrf_rvalid_o,
  output logic [31:0]     hdma_vrf_rdata_o,
  // subsystem bus towards the VRFs (global word index line*LINE_WORDS+word)
  output logic            vrf_req_o,
  output logic            vrf_we_o,
  output logic [3:0]      vrf_be_o,
  output logic [WW-1:0]   vrf_addr_o,
  output logic [31:0]     vrf_wdata_o,
  input  logic            vrf_gnt_i,
  input  logic            vrf_rvalid_i,
  input  logic [31:0]     vrf_rdata_i,
  output llc_ev_t         ev_o
);
  typedef enum logic [2:0] {
    S_IDLE, S_VICTIM, S_WB, S_WB_WAIT, S_FILL, S_FILL_WAIT
  } state_e;

  state_e        state_q;
  logic          lock_q;
  logic          cur_dma_q;      // operation in progress belongs to the DMA port
  logic          claim_mode_q;   // write-back is for a claim, not an eviction
  logic [LW-1:0] line_q;
  logic [31:0]   miss_addr_q, wb_addr_q;
  logic          rd_pend_q, rd_dma_q;

  // ---------------- request selection ----------------
  logic     sel_dma;
  bus_req_t cur;
  logic     dma_direct;
  assign sel_dma    = dma_req_i.req;
  assign cur        = sel_dma ? dma_req_i : host_req_i;
  assign dma_direct = sel_dma && ((dma_req_i.addr & VRF_MASK) == VRF_BASE);

  // ---------------- tables ----------------
  logic          lk_hit, lk_dirty, lk_sd;
  logic [LW-1:0] lk_line;
  logic          vic_valid, vic_dirty;
  logic [LW-1:0] vic_line;
  logic [31:0]   vic_addr;
  logic [LW-1:0] st_line;
  logic          st_valid, st_dirty, st_busy;
  logic [31:0]   st_addr;
  logic          touch, set_dirty, fill, claim, mark_line_sd;
  logic          at_upd, at_busy_src, at_busy_dst, at_overlap;
  logic [31:0]   at_upd_start, at_upd_end, fill_base;

  assign st_line   = LW'(dma_req_i.addr[31:OW]);
  assign fill_base = {miss_addr_q[31:OW], OW'(0)};

  cache_table #(.LINES(LINES), .NUM_VPU(NUM_VPU), .LINE_BYTES(LINE_BYTES)) u_ct (
    .clk_i, .rst_ni,
    .lk_addr_i      (cur.addr),
    .lk_hit_o       (lk_hit),
    .lk_line_o      (lk_line),
    .lk_dirty_o     (lk_dirty),
    .lk_sd_o        (lk_sd),
    .vic_valid_o    (vic_valid),
    .vic_line_o     (vic_line),
    .vic_dirty_o    (vic_dirty),
    .vic_addr_o     (vic_addr),
    .st_line_i      (st_line),
    .st_valid_o     (st_valid),
    .st_dirty_o     (st_dirty),
    .st_busy_o      (st_busy),
    .st_addr_o      (st_addr),
    .touch_i        (touch),
    .touch_line_i   (lk_line),
    .set_dirty_i    (set_dirty),
    .set_dirty_line_i(lk_line),
    .fill_i         (fill),
    .fill_line_i    (line_q),
    .fill_addr_i    (fill_base),
    .fill_sd_i      (at_overlap || cur_dma_q),
    .claim_i        (claim),
    .claim_line_i   ((state_q == S_IDLE) ? st_line : line_q),
    .release_i      (release_i),
    .release_first_i(release_first_i),
    .release_last_i (release_last_i),
    .mark_sd_i      (at_upd),
    .mark_start_i   (at_upd_start),
    .mark_end_i     (at_upd_end),
    .mark_line_sd_i (mark_line_sd),
    .mark_line_i    (lk_line),
    .dirty_cnt_o    (dirty_cnt_o)
  );

  addr_table #(.ENTRIES(AT_ENTRIES)) u_at (
    .clk_i, .rst_ni,
    .reg_req_i    (at_req_i),
    .reg_we_i     (at_we_i),
    .reg_addr_i   (at_addr_i),
    .reg_wdata_i  (at_wdata_i),
    .reg_rdata_o  (at_rdata_o),
    .upd_o        (at_upd),
    .upd_start_o  (at_upd_start),
    .upd_end_o    (at_upd_end),
    .lk_addr_i    (cur.addr),
    .lk_busy_src_o(at_busy_src),
    .lk_busy_dst_o(at_busy_dst),
    .rg_start_i   (fill_base),
    .rg_end_i     (fill_base | 32'(LINE_BYTES - 1)),
    .rg_overlap_o (at_overlap)
  );

  // ---------------- idle-state decision ----------------
  logic host_lock_stall, host_hazard, need_at, serve, go_miss, go_claim_wb;
  logic direct_claim, host_active, sd_hit, at_wait;
  // registered Address Table verdict for a host hit on an operand (sd) line:
  // such a hit spends one cycle on the table lookup before it is served
  logic at_ok_q, at_src_q, at_dst_q;
  always_comb begin
    host_lock_stall = 1'b0;
    host_hazard     = 1'b0;
    need_at         = 1'b0;
    serve           = 1'b0;
    go_miss         = 1'b0;
    go_claim_wb     = 1'b0;
    direct_claim    = 1'b0;
    sd_hit          = 1'b0;
    at_wait         = 1'b0;
    if (state_q == S_IDLE && cur.req) begin
      if (dma_direct) begin
        if (st_valid && st_dirty) go_claim_wb = 1'b1;
        else begin
          serve        = 1'b1;
          direct_claim = st_valid || !st_busy;
        end
      end else begin
        sd_hit  = !sel_dma && lk_hit && lk_sd;
        need_at = !sel_dma && !lk_hit;
        if (!sel_dma && lock_q) host_lock_stall = 1'b1;
        else if (sd_hit && !at_ok_q) begin
          need_at = 1'b1;          // lookup cycle, verdict registered
          at_wait = 1'b1;
        end
        else if (sd_hit && (at_dst_q || (at_src_q && cur.we))) host_hazard = 1'b1;
        else if (need_at && (at_busy_dst || (at_busy_src && cur.we))) host_hazard = 1'b1;
        else if (lk_hit) serve = 1'b1;
        else go_miss = 1'b1;
      end
    end
  end

  // host operation in progress: blocks the lock grant
  assign host_active = (state_q != S_IDLE && !cur_dma_q) ||
                       (state_q == S_IDLE && !sel_dma && host_req_i.req && !host_hazard);

  // ---------------- subsystem bus (VRF) ----------------
  logic [WW-1:0] own_addr;
  assign own_addr = dma_direct ? WW'(dma_req_i.addr[31:2])
                               : WW'({lk_line, cur.addr[OW-1:2]});
  always_comb begin
    if (state_q == S_IDLE) begin
      vrf_req_o   = serve;
      vrf_we_o    = cur.we;
      vrf_be_o    = cur.be;
      vrf_addr_o  = own_addr;
      vrf_wdata_o = cur.wdata;
    end else begin
      vrf_req_o   = hdma_vrf_req_i;
      vrf_we_o    = hdma_vrf_we_i;
      vrf_be_o    = 4'hf;
      vrf_addr_o  = hdma_vrf_addr_i;
      vrf_wdata_o = hdma_vrf_wdata_i;
    end
  end
  assign hdma_vrf_gnt_o    = (state_q != S_IDLE) && vrf_gnt_i;
  assign hdma_vrf_rvalid_o = vrf_rvalid_i && !rd_pend_q;
  assign hdma_vrf_rdata_o  = vrf_rdata_i;

  logic granted;
  assign granted = serve && vrf_gnt_i;

  always_comb begin
    host_rsp_o        = '0;
    dma_rsp_o         = '0;
    host_rsp_o.gnt    = granted && !sel_dma;
    dma_rsp_o.gnt     = granted && sel_dma;
    host_rsp_o.rvalid = rd_pend_q && !rd_dma_q && vrf_rvalid_i;
    dma_rsp_o.rvalid  = rd_pend_q && rd_dma_q && vrf_rvalid_i;
    host_rsp_o.rdata  = vrf_rdata_i;
    dma_rsp_o.rdata   = vrf_rdata_i;
  end

  assign touch        = granted && !dma_direct;
  assign set_dirty    = granted && !dma_direct && cur.we;
  assign mark_line_sd = granted && sel_dma && !dma_direct;
  assign fill         = (state_q == S_FILL_WAIT) && hdma_done_i;
  assign claim        = (granted && direct_claim) ||
                        (state_q == S_WB_WAIT && hdma_done_i && claim_mode_q);

  // ---------------- HW DMA commands ----------------
  always_comb begin
    hdma_valid_o = (state_q == S_WB) || (state_q == S_FILL);
    hdma_cmd_o.wb   = (state_q == S_WB);
    hdma_cmd_o.line = 16'(line_q);
    hdma_cmd_o.addr = (state_q == S_WB) ? wb_addr_q : fill_base;
  end

  // ---------------- FSM ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= S_IDLE;
      lock_q       <= 1'b0;
      cur_dma_q    <= 1'b0;
      claim_mode_q <= 1'b0;
      line_q       <= '0;
      miss_addr_q  <= '0;
      wb_addr_q    <= '0;
      rd_pend_q    <= 1'b0;
      rd_dma_q     <= 1'b0;
      at_ok_q      <= 1'b0;
      at_src_q     <= 1'b0;
      at_dst_q     <= 1'b0;
    end else begin
      // the verdict belongs to the waiting host request: it is refreshed every
      // cycle while that request stalls on it, and dropped on anything else
      at_ok_q  <= at_wait || (at_ok_q && sd_hit && (host_hazard || (serve && !vrf_gnt_i)));
      at_src_q <= at_busy_src;
      at_dst_q <= at_busy_dst;
      rd_pend_q <= granted && !cur.we;
      rd_dma_q  <= sel_dma;
      if (!lock_req_i)                     lock_q <= 1'b0;
      else if (!lock_q && !host_active)    lock_q <= 1'b1;
      case (state_q)
        S_IDLE: begin
          if (go_miss) begin
            cur_dma_q    <= sel_dma;
            claim_mode_q <= 1'b0;
            miss_addr_q  <= cur.addr;
            state_q      <= S_VICTIM;
          end else if (go_claim_wb) begin
            cur_dma_q    <= 1'b1;
            claim_mode_q <= 1'b1;
            line_q       <= st_line;
            wb_addr_q    <= st_addr;
            state_q      <= S_WB;
          end
        end
        S_VICTIM:
          if (vic_valid) begin
            line_q    <= vic_line;
            wb_addr_q <= vic_addr;
            state_q   <= vic_dirty ? S_WB : S_FILL;
          end
        S_WB:      if (hdma_ready_i) state_q <= S_WB_WAIT;
        S_WB_WAIT: if (hdma_done_i)  state_q <= claim_mode_q ? S_IDLE : S_FILL;
        S_FILL:    if (hdma_ready_i) state_q <= S_FILL_WAIT;
        S_FILL_WAIT: if (hdma_done_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign lock_gnt_o = lock_q;

  always_comb begin
    ev_o            = '0;
    ev_o.hit        = granted && !dma_direct;
    ev_o.miss       = go_miss;
    ev_o.writeback  = (state_q == S_WB) && hdma_ready_i;
    ev_o.lock_stall = host_lock_stall;
    ev_o.war_stall  = host_hazard && !(at_ok_q ? at_dst_q : at_busy_dst);
    ev_o.dst_stall  = host_hazard && (at_ok_q ? at_dst_q : at_busy_dst);
    ev_o.claim      = claim;
    ev_o.at_lookup  = need_at;
  end

  // bus rule: a request waiting for its grant keeps its address
  property p_hold(bus_req_t r, logic g);
    @(posedge clk_i) disable iff (!rst_ni) (r.req && !g) |=> (r.req && $stable(r.addr));
  endproperty
  a_host_hold: assert property (p_hold(host_req_i, host_rsp_o.gnt));
  a_dma_hold:  assert property (p_hold(dma_req_i, dma_rsp_o.gnt));
endmodule
