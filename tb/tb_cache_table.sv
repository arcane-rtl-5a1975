// tb_cache_table: fills, lookups, victim choice (free line first, then the
// oldest by the aging counters, never a busy line), dirty marking and per-VPU
// dirty counts, claim and release of busy lines, and source/destination
// flagging by address range, on an 8-line table of two VPUs.
module tb_cache_table;
  localparam int unsigned LINES = 8, NUM_VPU = 2, LW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] lk_addr, vic_addr, st_addr, fill_addr, mark_start, mark_end;
  logic lk_hit, lk_dirty, lk_sd, vic_valid, vic_dirty, st_valid, st_dirty, st_busy;
  logic [LW-1:0] lk_line, vic_line, st_line, touch_line, sd_line, fill_line, claim_line;
  logic [LW-1:0] rel_first, rel_last, mark_line;
  logic touch, set_dirty, fill, fill_sd, claim, rel, mark_sd, mark_line_sd;
  logic [NUM_VPU-1:0][LW:0] dcnt;

  cache_table #(.LINES(LINES), .NUM_VPU(NUM_VPU), .LINE_BYTES(1024)) dut (
    .clk_i(clk), .rst_ni(rst_n), .lk_addr_i(lk_addr), .lk_hit_o(lk_hit), .lk_line_o(lk_line),
    .lk_dirty_o(lk_dirty), .lk_sd_o(lk_sd), .vic_valid_o(vic_valid), .vic_line_o(vic_line),
    .vic_dirty_o(vic_dirty), .vic_addr_o(vic_addr), .st_line_i(st_line), .st_valid_o(st_valid),
    .st_dirty_o(st_dirty), .st_busy_o(st_busy), .st_addr_o(st_addr), .touch_i(touch),
    .touch_line_i(touch_line), .set_dirty_i(set_dirty), .set_dirty_line_i(sd_line),
    .fill_i(fill), .fill_line_i(fill_line), .fill_addr_i(fill_addr), .fill_sd_i(fill_sd),
    .claim_i(claim), .claim_line_i(claim_line), .release_i(rel), .release_first_i(rel_first),
    .release_last_i(rel_last), .mark_sd_i(mark_sd), .mark_start_i(mark_start),
    .mark_end_i(mark_end), .mark_line_sd_i(mark_line_sd), .mark_line_i(mark_line),
    .dirty_cnt_o(dcnt));

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic idle();
    touch = 0; set_dirty = 0; fill = 0; claim = 0; rel = 0; mark_sd = 0; mark_line_sd = 0;
  endtask

  task automatic do_fill(int line, logic [31:0] addr, logic sd);
    @(negedge clk); idle(); fill = 1; fill_line = LW'(line); fill_addr = addr; fill_sd = sd;
    @(negedge clk); idle();
  endtask
  task automatic do_touch(int line);
    @(negedge clk); idle(); touch = 1; touch_line = LW'(line);
    @(negedge clk); idle();
  endtask

  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle();
    lk_addr = 0; st_line = 0; touch_line = 0; sd_line = 0; fill_line = 0; claim_line = 0;
    rel_first = 0; rel_last = 0; mark_line = 0; fill_addr = 0; fill_sd = 0;
    mark_start = 0; mark_end = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(vic_valid && vic_line == 0, "empty table: victim is line 0");
    lk_addr = 32'h0000_1000; #1 check(!lk_hit, "empty table misses");
    // fill all lines with tags 0x1000 * (i+1)
    for (int i = 0; i < LINES; i++) begin
      check(vic_valid && vic_line == LW'(i), $sformatf("free-first victim %0d", i));
      do_fill(i, 32'h0010_0000 + 32'(i) * 1024, 0);
      do_touch(i);
    end
    for (int i = 0; i < LINES; i++) begin
      lk_addr = 32'h0010_0000 + 32'(i) * 1024 + 32'(4 * i); #1;
      check(lk_hit && lk_line == LW'(i), $sformatf("lookup hit line %0d", i));
    end
    lk_addr = 32'h0020_0000; #1 check(!lk_hit, "lookup miss");
    // line 0 is oldest (touched first)
    check(vic_valid && vic_line == 0, "LRU victim is the oldest line");
    do_touch(0);
    check(vic_line == 1, "after touching 0, victim is line 1");
    do_touch(1); do_touch(2);
    check(vic_line == 3, "victim moves to line 3");
    check(vic_addr == 32'h0010_0000 + 3 * 1024, "victim address");
    // dirty
    @(negedge clk); idle(); set_dirty = 1; sd_line = 3;
    @(negedge clk); idle(); set_dirty = 1; sd_line = 6;
    @(negedge clk); idle();
    check(vic_dirty, "victim dirty");
    check(dcnt[0] == 1 && dcnt[1] == 1, "dirty counts per VPU");
    lk_addr = 32'h0010_0000 + 3 * 1024; #1 check(lk_hit && lk_dirty, "lookup dirty");
    // claim line 3 : invalid + busy, not a victim anymore
    @(negedge clk); idle(); claim = 1; claim_line = 3;
    @(negedge clk); idle();
    st_line = 3; #1;
    check(!st_valid && st_busy && !st_dirty, "claimed line busy, invalid");
    check(vic_valid && vic_line != 3, "busy line is not a victim");
    lk_addr = 32'h0010_0000 + 3 * 1024; #1 check(!lk_hit, "claimed line no longer hits");
    check(dcnt[0] == 0, "claim clears dirty count");
    // release lines 2..4: line 3 becomes free and is the victim
    @(negedge clk); idle(); rel = 1; rel_first = 2; rel_last = 4;
    @(negedge clk); idle();
    #1 check(!st_busy && vic_line == 3, "released line is free victim");
    // sd flags
    lk_addr = 32'h0010_0000 + 5 * 1024; #1 check(!lk_sd, "no sd before mark");
    @(negedge clk); idle(); mark_sd = 1; mark_start = 32'h0010_0000 + 5 * 1024 + 100;
    mark_end = 32'h0010_0000 + 6 * 1024 + 8;
    @(negedge clk); idle();
    lk_addr = 32'h0010_0000 + 5 * 1024; #1 check(lk_sd, "range flags line 5");
    lk_addr = 32'h0010_0000 + 6 * 1024; #1 check(lk_sd, "range flags line 6");
    lk_addr = 32'h0010_0000 + 7 * 1024; #1 check(!lk_sd, "line 7 outside range");
    @(negedge clk); idle(); mark_line_sd = 1; mark_line = 7;
    @(negedge clk); idle();
    #1 check(lk_sd, "single-line flag");
    // all busy -> no victim
    for (int i = 0; i < LINES; i++) begin
      @(negedge clk); idle(); claim = 1; claim_line = LW'(i);
    end
    @(negedge clk); idle();
    #1 check(!vic_valid, "no victim when all lines busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
