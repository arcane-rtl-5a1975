// cache_table: the Cache Table (CT) of the fully associative LLC. One entry
// per cache line, i.e. per vector register of all VPUs (line = vpu*VREGS +
// vreg). Each entry holds the line tag (address bits above the line offset)
// and the status bits valid, dirty, sd (line overlaps a kernel source or
// destination registered in the Address Table) and busy (line is lent to a
// kernel as a vector register, "busy computing"), plus an age counter.
//
// Lookup is combinational over all entries, so a hit is known in the cycle of
// the request. Replacement is an approximate LRU: every access clears the
// line's AGE_W-bit counter and ages every other valid line by one, saturating.
// The victim is the first free line that is neither valid nor busy, else the
// oldest valid line that is not busy (lowest index on ties). Busy lines are
// never victims. Updates take effect at the next clock edge; several
// different update inputs may be given in one cycle. The per-VPU dirty-line
// counts feed the scheduler's VPU choice.
//
// From the paper: fully associative, lines = VPUs x vector registers, counter
// based approximate LRU, write-back (dirty bit), source/destination and busy
// status bits. Counter width, tie-breaking and the range operations are this
// design's choices.
module cache_table #(
  parameter int unsigned LINES      = 128,
  parameter int unsigned NUM_VPU    = 4,
  parameter int unsigned LINE_BYTES = 1024,
  parameter int unsigned AGE_W      = 3,
  localparam int unsigned LW = $clog2(LINES),
  localparam int unsigned OW = $clog2(LINE_BYTES),
  localparam int unsigned TW = 32 - OW
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // lookup
  input  logic [31:0]          lk_addr_i,
  output logic                 lk_hit_o,
  output logic [LW-1:0]        lk_line_o,
  output logic                 lk_dirty_o,
  output logic                 lk_sd_o,
  // victim
  output logic                 vic_valid_o,
  output logic [LW-1:0]        vic_line_o,
  output logic                 vic_dirty_o,
  output logic [31:0]          vic_addr_o,   // address the victim caches
  // per-line status of an addressed line
  input  logic [LW-1:0]        st_line_i,
  output logic                 st_valid_o,
  output logic                 st_dirty_o,
  output logic                 st_busy_o,
  output logic [31:0]          st_addr_o,
  // updates
  input  logic                 touch_i,
  input  logic [LW-1:0]        touch_line_i,
  input  logic                 set_dirty_i,
  input  logic [LW-1:0]        set_dirty_line_i,
  input  logic                 fill_i,
  input  logic [LW-1:0]        fill_line_i,
  input  logic [31:0]          fill_addr_i,
  input  logic                 fill_sd_i,
  input  logic                 claim_i,        // invalidate and mark busy
  input  logic [LW-1:0]        claim_line_i,
  input  logic                 release_i,      // clear busy on [first,last]
  input  logic [LW-1:0]        release_first_i,
  input  logic [LW-1:0]        release_last_i,
  input  logic                 mark_sd_i,      // flag lines overlapping [start,end]
  input  logic [31:0]          mark_start_i,
  input  logic [31:0]          mark_end_i,
  input  logic                 mark_line_sd_i, // flag one line
  input  logic [LW-1:0]        mark_line_i,
  // statistics
  output logic [NUM_VPU-1:0][LW:0] dirty_cnt_o
);
  typedef struct packed {
    logic          valid;
    logic          dirty;
    logic          sd;
    logic          busy;
    logic [TW-1:0] tag;
    logic [AGE_W-1:0] age;
  } ct_entry_t;

  localparam int unsigned PER_VPU = LINES / NUM_VPU;

  ct_entry_t ct_q [LINES];

  // ---------------- lookup ----------------
  always_comb begin
    lk_hit_o   = 1'b0;
    lk_line_o  = '0;
    for (int i = LINES - 1; i >= 0; i--) begin
      if (ct_q[i].valid && ct_q[i].tag == lk_addr_i[31:OW]) begin
        lk_hit_o  = 1'b1;
        lk_line_o = LW'(i);
      end
    end
    lk_dirty_o = ct_q[lk_line_o].dirty;
    lk_sd_o    = ct_q[lk_line_o].sd;
  end

  // ---------------- victim (approximate LRU) ----------------
  always_comb begin
    logic found_free;
    logic [AGE_W:0] best_age;
    found_free  = 1'b0;
    vic_valid_o = 1'b0;
    vic_line_o  = '0;
    best_age    = '0;
    for (int i = 0; i < LINES; i++) begin
      if (!found_free && !ct_q[i].valid && !ct_q[i].busy) begin
        found_free  = 1'b1;
        vic_valid_o = 1'b1;
        vic_line_o  = LW'(i);
      end
    end
    if (!found_free) begin
      for (int i = 0; i < LINES; i++) begin
        if (ct_q[i].valid && !ct_q[i].busy &&
            (!vic_valid_o || {1'b0, ct_q[i].age} > best_age)) begin
          vic_valid_o = 1'b1;
          vic_line_o  = LW'(i);
          best_age    = {1'b0, ct_q[i].age};
        end
      end
    end
    vic_dirty_o = ct_q[vic_line_o].valid && ct_q[vic_line_o].dirty;
    vic_addr_o  = {ct_q[vic_line_o].tag, OW'(0)};
  end

  assign st_valid_o = ct_q[st_line_i].valid;
  assign st_dirty_o = ct_q[st_line_i].dirty;
  assign st_busy_o  = ct_q[st_line_i].busy;
  assign st_addr_o  = {ct_q[st_line_i].tag, OW'(0)};

  always_comb begin
    for (int v = 0; v < NUM_VPU; v++) begin
      dirty_cnt_o[v] = '0;
      for (int i = 0; i < PER_VPU; i++)
        dirty_cnt_o[v] += (LW+1)'(ct_q[v*PER_VPU + i].valid && ct_q[v*PER_VPU + i].dirty);
    end
  end

  // ---------------- updates ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < LINES; i++) ct_q[i] <= '0;
    end else begin
      for (int i = 0; i < LINES; i++) begin
        logic [31:0] lstart, lend;
        lstart = {ct_q[i].tag, OW'(0)};
        lend   = {ct_q[i].tag, {OW{1'b1}}};
        if (touch_i) begin
          if (touch_line_i == LW'(i))
            ct_q[i].age <= '0;
          else if (ct_q[i].valid && ct_q[i].age != '1)
            ct_q[i].age <= ct_q[i].age + 1'b1;
        end
        if (set_dirty_i && set_dirty_line_i == LW'(i))
          ct_q[i].dirty <= 1'b1;
        if (mark_sd_i && ct_q[i].valid && lstart <= mark_end_i && lend >= mark_start_i)
          ct_q[i].sd <= 1'b1;
        if (mark_line_sd_i && mark_line_i == LW'(i))
          ct_q[i].sd <= 1'b1;
        if (release_i && LW'(i) >= release_first_i && LW'(i) <= release_last_i)
          ct_q[i].busy <= 1'b0;
        if (fill_i && fill_line_i == LW'(i)) begin
          ct_q[i].valid <= 1'b1;
          ct_q[i].dirty <= 1'b0;
          ct_q[i].busy  <= 1'b0;
          ct_q[i].sd    <= fill_sd_i;
          ct_q[i].tag   <= fill_addr_i[31:OW];
          ct_q[i].age   <= '0;
        end
        if (claim_i && claim_line_i == LW'(i)) begin
          ct_q[i].valid <= 1'b0;
          ct_q[i].dirty <= 1'b0;
          ct_q[i].sd    <= 1'b0;
          ct_q[i].busy  <= 1'b1;
        end
      end
    end
  end
endmodule
