// sram_bank: single-port synchronous SRAM bank, 32-bit words with byte
// enables. One bank serves one lane of a VPU vector register file; the LLC
// stores its cache lines in the same banks. A read returns data on the cycle
// after the request. Contents are not reset, as in an SRAM macro. The bank is
// written as a plain array so synthesis can map it to a memory macro; the
// macro itself and its size per lane follow the paper, the timing is assumed.
module sram_bank #(
  parameter int unsigned WORDS = 2048,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [3:0]    be_i,
  input  logic [AW-1:0] addr_i,
  input  logic [31:0]   wdata_i,
  output logic [31:0]   rdata_o
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
