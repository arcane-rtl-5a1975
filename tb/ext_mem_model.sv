// ext_mem_model: behavioural model of the off-chip memory (e.g. a flash or
// PSRAM behind an SPI controller) seen through a request/grant/read-valid bus.
// Grants after a random 0..MAX_WAIT cycle wait, returns read data LAT cycles
// after the grant. Word i starts as init_word(i), so testbenches can predict
// the contents. Addresses wrap inside the modelled size.
module ext_mem_model
  import arcane_pkg::*;
#(
  parameter int unsigned WORDS    = 65536,
  parameter int unsigned MAX_WAIT = 2,
  parameter int unsigned LAT      = 1
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  bus_req_t req_i,
  output bus_rsp_t rsp_o
);
  logic [31:0] mem [WORDS];
  int          wait_cnt;
  logic [LAT:0] vpipe;
  logic [31:0] dpipe [LAT+1];
  int unsigned reads, writes;

  function automatic logic [31:0] init_word(int unsigned i);
    return (i * 32'h9E37_79B1) ^ 32'h5A5A_0F0F;
  endfunction

  initial for (int unsigned i = 0; i < WORDS; i++) mem[i] = init_word(i);

  assign rsp_o.gnt    = req_i.req && (wait_cnt == 0);
  assign rsp_o.rvalid = vpipe[LAT-1];
  assign rsp_o.rdata  = dpipe[LAT-1];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wait_cnt <= 0;
      vpipe    <= '0;
      reads    <= 0;
      writes   <= 0;
    end else begin
      vpipe <= {vpipe[LAT-1:0], 1'b0};
      for (int i = LAT; i > 0; i--) dpipe[i] <= dpipe[i-1];
      if (req_i.req && wait_cnt != 0) wait_cnt <= wait_cnt - 1;
      if (rsp_o.gnt) begin
        wait_cnt <= int'($urandom_range(MAX_WAIT));
        if (req_i.we) begin
          writes <= writes + 1;
          for (int b = 0; b < 4; b++)
            if (req_i.be[b]) mem[(req_i.addr >> 2) % WORDS][8*b +: 8] <= req_i.wdata[8*b +: 8];
        end else begin
          reads    <= reads + 1;
          vpipe[0] <= 1'b1;
          dpipe[0] <= mem[(req_i.addr >> 2) % WORDS];
        end
      end
    end
  end
endmodule
