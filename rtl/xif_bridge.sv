// xif_bridge: the bridge between the host CPU's coprocessor interface
// (CORE-V-X-IF style issue / commit / result) and the eCPU, which decodes the
// offloaded matrix instructions in software.
//
// Flow: an issued instruction with the custom-2 opcode (0x5b) is sampled
// (instruction word, rs1..rs3, id) and the eCPU is interrupted (irq_o). The
// host keeps issue_valid high; the bridge holds issue_ready low until the eCPU
// writes its decoding outcome to DECISION, then completes the issue handshake
// with that accept bit. Other opcodes are refused at once. After an accept the
// bridge waits for the host's commit: on kill it reports KILLED to the eCPU and
// idles once the eCPU acknowledges; on commit it returns a result (no register
// write-back, the host continues out of order) and reports COMMITTED to the
// eCPU, which acknowledges once it has queued the kernel.
//
// eCPU registers (word offsets, read data one cycle after the request):
//   0 INSTR  1 RS1  2 RS2  3 RS3  4 ID (read only)
//   5 STATUS {killed[2], committed[1], pending[0]} (read)
//   6 DECISION write {accept[1], valid[0]}
//   7 ACK write: acknowledges kill or commit
// The sampling, the interrupt, the software decision register, commit/kill
// and the idle-after-kill behaviour follow the paper; the register map and the
// reduced X-IF signal set are this design's choices.
module xif_bridge
  import arcane_pkg::*;
(
  input  logic            clk_i,
  input  logic            rst_ni,
  // host CV-X-IF
  input  logic            issue_valid_i,
  output logic            issue_ready_o,
  input  xif_issue_req_t  issue_req_i,
  output xif_issue_resp_t issue_resp_o,
  input  logic            commit_valid_i,
  input  xif_commit_t     commit_i,
  output logic            result_valid_o,
  input  logic            result_ready_i,
  output logic [3:0]      result_id_o,
  // eCPU side
  output logic            irq_o,
  input  logic            reg_req_i,
  input  logic            reg_we_i,
  input  logic [2:0]      reg_addr_i,
  input  logic [31:0]     reg_wdata_i,
  output logic [31:0]     reg_rdata_o
);
  typedef enum logic [2:0] {
    S_IDLE, S_DECODE, S_RESP, S_COMMIT, S_RESULT, S_WAIT_ACK, S_KILLED
  } state_e;

  state_e         state_q;
  xif_issue_req_t req_q;
  logic           accept_q;

  logic wr_decision, wr_ack;
  assign wr_decision = reg_req_i && reg_we_i && reg_addr_i == 3'd6 && reg_wdata_i[0];
  assign wr_ack      = reg_req_i && reg_we_i && reg_addr_i == 3'd7;

  logic is_custom;
  assign is_custom = issue_req_i.instr[6:0] == OPC_XMNMC;

  always_comb begin
    issue_ready_o          = 1'b0;
    issue_resp_o           = '0;
    if (state_q == S_IDLE && issue_valid_i && !is_custom) begin
      issue_ready_o = 1'b1;            // refuse foreign opcodes at once
    end else if (state_q == S_RESP) begin
      issue_ready_o       = 1'b1;
      issue_resp_o.accept = accept_q;
    end
  end

  assign result_valid_o = (state_q == S_RESULT);
  assign result_id_o    = req_q.id;
  assign irq_o          = (state_q == S_DECODE) || (state_q == S_WAIT_ACK) ||
                          (state_q == S_KILLED);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= S_IDLE;
      req_q    <= '0;
      accept_q <= 1'b0;
    end else begin
      case (state_q)
        S_IDLE:
          if (issue_valid_i && is_custom) begin
            req_q   <= issue_req_i;
            state_q <= S_DECODE;
          end
        S_DECODE:
          if (wr_decision) begin
            accept_q <= reg_wdata_i[1];
            state_q  <= S_RESP;
          end
        S_RESP:   state_q <= accept_q ? S_COMMIT : S_IDLE;
        S_COMMIT:
          if (commit_valid_i && commit_i.id == req_q.id)
            state_q <= commit_i.kill ? S_KILLED : S_RESULT;
        S_RESULT: if (result_ready_i) state_q <= S_WAIT_ACK;
        S_WAIT_ACK, S_KILLED: if (wr_ack) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) reg_rdata_o <= '0;
    else if (reg_req_i) begin
      case (reg_addr_i)
        3'd0:    reg_rdata_o <= req_q.instr;
        3'd1:    reg_rdata_o <= req_q.rs1;
        3'd2:    reg_rdata_o <= req_q.rs2;
        3'd3:    reg_rdata_o <= req_q.rs3;
        3'd4:    reg_rdata_o <= 32'(req_q.id);
        3'd5:    reg_rdata_o <= {29'd0, state_q == S_KILLED,
                                 state_q == S_WAIT_ACK, state_q == S_DECODE};
        default: reg_rdata_o <= '0;
      endcase
    end
  end

  // the host must hold an issued instruction until it is taken
  a_issue_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (issue_valid_i && !issue_ready_o) |=> issue_valid_i);
endmodule
