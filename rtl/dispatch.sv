// dispatch: distributes the near-memory vector instructions that the eCPU
// issues over its coprocessor interface to the VPUs. rs2[16 +: NUM_VPU]
// selects the target VPUs (several at once broadcast the same instruction);
// the instruction word, rs1 and rs2 are forwarded unchanged. An instruction is
// taken only when every selected VPU is ready, so all targets start it in
// the same cycle. Instructions with another opcode or an empty VPU mask are
// refused (taken with accept low). busy_o reports which VPUs are working.
// The paper names the dispatcher and its job; the VPU mask in rs2 and the
// join of the ready signals are this design's choices.
module dispatch
  import arcane_pkg::*;
#(
  parameter int unsigned NUM_VPU = 4
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                issue_valid_i,
  output logic                issue_ready_o,
  output logic                issue_accept_o,
  input  logic [31:0]         instr_i,
  input  logic [31:0]         rs1_i,
  input  logic [31:0]         rs2_i,
  output logic [NUM_VPU-1:0]  vpu_valid_o,
  input  logic [NUM_VPU-1:0]  vpu_ready_i,
  output logic [31:0]         vpu_instr_o,
  output logic [31:0]         vpu_rs1_o,
  output logic [31:0]         vpu_rs2_o,
  output logic [NUM_VPU-1:0]  busy_o,
  output logic [31:0]         dispatched_o    // count of instructions sent
);
  logic [NUM_VPU-1:0] mask;
  logic valid_op, all_ready;

  assign mask      = rs2_i[16 +: NUM_VPU];
  assign valid_op  = (instr_i[6:0] == OPC_VEC) && (mask != '0);
  assign all_ready = ((vpu_ready_i & mask) == mask);

  assign issue_ready_o  = issue_valid_i && (!valid_op || all_ready);
  assign issue_accept_o = valid_op;
  assign vpu_valid_o    = (issue_valid_i && valid_op && all_ready) ? mask : '0;
  assign vpu_instr_o    = instr_i;
  assign vpu_rs1_o      = rs1_i;
  assign vpu_rs2_o      = rs2_i;
  assign busy_o         = ~vpu_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) dispatched_o <= '0;
    else if (vpu_valid_o != '0) dispatched_o <= dispatched_o + 1;
  end
endmodule
