// tb_vrf: bus writes and reads against a word model, lane reads that check
// the word interleaving (word w in bank w%LANES, row w/LANES), lane writes
// seen from the bus, and the arbitration rule (a lane on the same bank blocks
// the bus grant, a lane on another bank does not).
module tb_vrf;
  localparam int unsigned LANES = 4, VRF_BYTES = 2048;
  localparam int unsigned WORDS = VRF_BYTES / 4, ROWS = WORDS / LANES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [LANES-1:0] l_req, l_we;
  logic [LANES-1:0][6:0] l_addr;
  logic [LANES-1:0][31:0] l_wdata, l_rdata;
  logic b_req, b_we, b_gnt, b_rvalid;
  logic [3:0] b_be;
  logic [8:0] b_addr;
  logic [31:0] b_wdata, b_rdata;
  logic [31:0] model [WORDS];

  vrf #(.LANES(LANES), .VRF_BYTES(VRF_BYTES)) dut (
    .clk_i(clk), .rst_ni(rst_n), .lane_req_i(l_req), .lane_we_i(l_we), .lane_addr_i(l_addr),
    .lane_wdata_i(l_wdata), .lane_rdata_o(l_rdata), .bus_req_i(b_req), .bus_we_i(b_we),
    .bus_be_i(b_be), .bus_addr_i(b_addr), .bus_wdata_i(b_wdata), .bus_gnt_o(b_gnt),
    .bus_rvalid_o(b_rvalid), .bus_rdata_o(b_rdata));

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    l_req = 0; l_we = 0; l_addr = '0; l_wdata = '0;
    b_req = 0; b_we = 0; b_be = 4'hf; b_addr = 0; b_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < WORDS; w++) begin
      @(negedge clk);
      b_req = 1; b_we = 1; b_addr = 9'(w); b_wdata = $urandom; model[w] = b_wdata;
      #1 check(b_gnt, "bus write grant");
    end
    @(negedge clk); b_req = 0;
    // bus reads
    for (int n = 0; n < 50; n++) begin
      int w;
      w = $urandom_range(WORDS - 1);
      @(negedge clk); b_req = 1; b_we = 0; b_addr = 9'(w);
      @(negedge clk); b_req = 0;
      check(b_rvalid && b_rdata == model[w], $sformatf("bus read %0d", w));
    end
    // lane reads of a row
    for (int n = 0; n < 20; n++) begin
      int r;
      r = $urandom_range(ROWS - 1);
      @(negedge clk); l_req = '1; l_we = '0;
      for (int l = 0; l < LANES; l++) l_addr[l] = 7'(r);
      @(negedge clk); l_req = '0;
      for (int l = 0; l < LANES; l++)
        check(l_rdata[l] == model[r * LANES + l], $sformatf("lane %0d row %0d", l, r));
    end
    // lane write, bus read back
    @(negedge clk); l_req = 4'b0100; l_we = 4'b0100; l_addr[2] = 7'd5; l_wdata[2] = 32'hCAFE_0002;
    model[5 * LANES + 2] = 32'hCAFE_0002;
    @(negedge clk); l_req = 0; l_we = 0;
    b_req = 1; b_we = 0; b_addr = 9'(5 * LANES + 2);
    @(negedge clk); b_req = 0;
    check(b_rdata == 32'hCAFE_0002, "lane write visible on bus");
    // arbitration: lane 1 busy blocks bus to bank 1 only
    @(negedge clk); l_req = 4'b0010; b_req = 1; b_we = 0; b_addr = 9'(LANES + 1);
    #1 check(!b_gnt, "bus blocked by lane on same bank");
    b_addr = 9'(LANES + 3);
    #1 check(b_gnt, "bus granted on other bank");
    @(negedge clk); l_req = 0; b_req = 0;
    check(b_rdata == model[LANES + 3], "read during lane activity");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
