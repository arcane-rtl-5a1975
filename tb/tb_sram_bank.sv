// tb_sram_bank: random byte-enabled writes and reads against a reference
// array; checks one-cycle read latency and that byte enables mask writes.
module tb_sram_bank;
  localparam int unsigned WORDS = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req, we;
  logic [3:0] be;
  logic [5:0] addr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [WORDS];

  sram_bank #(.WORDS(WORDS)) dut (.clk_i(clk), .req_i(req), .we_i(we), .be_i(be),
                                  .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; be = 0; addr = 0; wdata = 0;
    // initialise every word
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      req = 1; we = 1; be = 4'hf; addr = 6'(i); wdata = $urandom; model[i] = wdata;
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      req = 1; addr = 6'($urandom_range(WORDS - 1)); we = $urandom_range(1);
      be = 4'($urandom); wdata = $urandom;
      if (we) begin
        for (int b = 0; b < 4; b++) if (be[b]) model[addr][8*b +: 8] = wdata[8*b +: 8];
      end else begin
        logic [31:0] exp;
        exp = model[addr];
        @(negedge clk);
        req = 0;
        checks++;
        if (rdata !== exp) begin
          failures++;
          $display("read mismatch addr %0d: %h vs %h", addr, rdata, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
