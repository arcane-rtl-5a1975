// vpu: near-memory vector processing unit (one per VRF), standing in for an
// NM-Carus instance. It has a decode-and-issue stage, LANES ALUs (one per VRF
// bank) and a move/slide path, and works directly on the vector registers of
// its VRF, which are at the same time cache lines of the LLC.
//
// Instruction (accepted when in_valid_i && in_ready_o):
//   in_instr_i  : [6:0]=OPC_VEC, [11:7]=vd, [14:12]=sew, [19:15]=vs1,
//                 [24:20]=vs2, [25]=.vx (scalar second operand), [31:26]=op
//   in_rs1_i    : scalar operand (vx forms); slide amount in elements
//   in_rs2_i    : [15:0] vector length in elements
// Elements of 8 and 16 bits are packed into the 32-bit word of each lane and
// processed as packed SIMD; the vector length is rounded up to whole words.
//
// Execution: the register is processed one row (LANES words) at a time. The
// banks are single ported, so a row takes one cycle per source read (vs1,
// vs2 unless .vx, vd for VMACC) plus one write cycle: VADD.vv takes 3 cycles
// per row, VADD.vx 2. Slides read LANES consecutive source words, which always
// fall in distinct banks, and rotate them onto the lanes (2 cycles per row).
// A slide of 8/16-bit elements by an amount that is not a whole number of
// words reads the next LANES words as well and funnel-shifts each pair of
// neighbouring words by the remaining bytes (3 cycles per row). Source words
// at or beyond the vector length read as zero. done_o pulses in the
// cycle of the last write. An unknown opcode or operation is dropped and
// flagged with illegal_o.
//
// The paper takes the VPU from NM-Carus and only names its parts; the
// operation set and encoding here are this design's own minimal choice,
// covering what the paper's kernels need (MAC, max, shift-based ReLU, slides).
module vpu
  import arcane_pkg::*;
#(
  parameter int unsigned LANES     = 4,
  parameter int unsigned VRF_BYTES = 32768,
  localparam int unsigned ROWS     = VRF_BYTES / 4 / LANES,
  localparam int unsigned RAW      = $clog2(ROWS)
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       in_valid_i,
  output logic                       in_ready_o,
  input  logic [31:0]                in_instr_i,
  input  logic [31:0]                in_rs1_i,
  input  logic [31:0]                in_rs2_i,
  output logic                       busy_o,
  output logic                       done_o,
  output logic                       illegal_o,
  // VRF lane ports
  output logic [LANES-1:0]           lane_req_o,
  output logic [LANES-1:0]           lane_we_o,
  output logic [LANES-1:0][RAW-1:0]  lane_addr_o,
  output logic [LANES-1:0][31:0]     lane_wdata_o,
  input  logic [LANES-1:0][31:0]     lane_rdata_i
);
  localparam int unsigned RPR = LINE_WORDS / LANES;   // rows per vector register
  localparam int unsigned LW  = (LANES > 1) ? $clog2(LANES) : 1;

  typedef enum logic [2:0] {S_IDLE, S_RD1, S_RD2, S_RD3, S_WR} state_e;
  typedef enum logic [1:0] {C_NONE, C_OP1, C_OP2, C_OP3} cap_e;

  state_e  state_q;
  cap_e    cap_q;
  vinstr_t vi_q, vi_d;
  logic [15:0] nw_q;     // words to process
  logic [15:0] row_q;    // current row
  logic [15:0] nrows_q;
  logic [LANES-1:0][31:0] op1_q, op2_q, op3_q, op1, op2, op3;
  logic [LW-1:0] krot_q;   // bank rotation of the slide's word offset
  logic [15:0]   kw_q;     // slide offset in whole words
  logic [1:0]    bsh_q;    // remaining slide offset in bytes (8/16-bit elements)

  // ---------------- decode & issue ----------------
  logic legal;
  logic [15:0] nw_d;
  logic [17:0] kb_d;       // slide offset in bytes
  always_comb begin
    vi_d.op     = vop_e'(in_instr_i[31:26]);
    vi_d.vx     = in_instr_i[25];
    vi_d.vs2    = in_instr_i[24:20];
    vi_d.vs1    = in_instr_i[19:15];
    vi_d.sew    = sew_e'(in_instr_i[14:12]);
    vi_d.vd     = in_instr_i[11:7];
    vi_d.scalar = in_rs1_i;
    vi_d.vl     = in_rs2_i[15:0];
    legal = (in_instr_i[6:0] == OPC_VEC) && (in_instr_i[31:26] <= 6'(VSLIDEDN)) &&
            (in_instr_i[14:12] <= 3'(SEW32)) && (in_rs2_i[15:0] != 16'd0);
    case (vi_d.sew)
      SEW8:    nw_d = (vi_d.vl + 16'd3) >> 2;
      SEW16:   nw_d = (vi_d.vl + 16'd1) >> 1;
      default: nw_d = vi_d.vl;
    endcase
    if (nw_d > 16'(LINE_WORDS)) nw_d = 16'(LINE_WORDS);
    case (vi_d.sew)
      SEW8:    kb_d = 18'(in_rs1_i[15:0]);
      SEW16:   kb_d = 18'(in_rs1_i[15:0]) << 1;
      default: kb_d = 18'(in_rs1_i[15:0]) << 2;
    endcase
  end

  assign in_ready_o = (state_q == S_IDLE);
  assign busy_o     = (state_q != S_IDLE);

  function automatic logic needs_vs1(vop_e op, logic vx);
    return !(op == VMV && vx);
  endfunction
  function automatic logic needs_vs2(vop_e op, logic vx);
    return !vx && !(op inside {VMV, VSLIDEDN});
  endfunction
  // an unaligned slide reads the source row twice: words at +kw and at +kw+1
  logic slide2;
  assign slide2 = (vi_q.op == VSLIDEDN) && (bsh_q != 2'd0);

  // ---------------- operand capture ----------------
  logic [LANES-1:0][31:0] slid, slid2;
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      slid[l]  = lane_rdata_i[(l + int'(krot_q)) % LANES];
      slid2[l] = lane_rdata_i[(l + int'(krot_q) + 1) % LANES];
      if (row_q * 16'(LANES) + 16'(l) + kw_q >= nw_q) slid[l] = '0;
      if (row_q * 16'(LANES) + 16'(l) + kw_q + 16'd1 >= nw_q) slid2[l] = '0;
    end
    op1 = (cap_q == C_OP1) ? ((vi_q.op == VSLIDEDN) ? slid : lane_rdata_i) : op1_q;
    op2 = (cap_q == C_OP2) ? ((vi_q.op == VSLIDEDN) ? slid2 : lane_rdata_i) : op2_q;
    op3 = (cap_q == C_OP3) ? lane_rdata_i : op3_q;
  end

  // ---------------- lane ALUs ----------------
  function automatic logic [31:0] el_op(vop_e op, logic signed [31:0] a,
                                        logic signed [31:0] b, logic signed [31:0] c);
    case (op)
      VADD:    return a + b;
      VSUB:    return a - b;
      VMUL:    return a * b;
      VMACC:   return c + a * b;
      VMAX:    return (a > b) ? a : b;
      VMIN:    return (a < b) ? a : b;
      VSRA:    return a >>> b[4:0];
      default: return a;
    endcase
  endfunction

  function automatic logic [31:0] alu(vinstr_t vi, logic [31:0] a, logic [31:0] bv,
                                      logic [31:0] c);
    logic [31:0] r, b, av;
    b  = vi.vx ? vi.scalar : bv;
    av = (vi.op == VMV && vi.vx) ? vi.scalar : a;
    r  = '0;
    case (vi.sew)
      SEW8:
        for (int e = 0; e < 4; e++) begin
          logic [31:0] t;
          t = el_op(vi.op, 32'(signed'(av[8*e +: 8])),
                    32'(signed'(vi.vx ? b[7:0] : b[8*e +: 8])),
                    32'(signed'(c[8*e +: 8])));
          r[8*e +: 8] = t[7:0];
        end
      SEW16:
        for (int e = 0; e < 2; e++) begin
          logic [31:0] t;
          t = el_op(vi.op, 32'(signed'(av[16*e +: 16])),
                    32'(signed'(vi.vx ? b[15:0] : b[16*e +: 16])),
                    32'(signed'(c[16*e +: 16])));
          r[16*e +: 16] = t[15:0];
        end
      default: r = el_op(vi.op, av, b, c);
    endcase
    return r;
  endfunction

  // ---------------- bank requests ----------------
  always_comb begin
    lane_req_o   = '0;
    lane_we_o    = '0;
    lane_addr_o  = '0;
    lane_wdata_o = '0;
    for (int l = 0; l < LANES; l++) begin
      logic [15:0] w;
      logic [31:0] src, src2;
      logic [63:0] pair;
      w    = row_q * 16'(LANES) + 16'(l);
      src  = 32'(vi_q.vs1) * LINE_WORDS + 32'(row_q) * LANES
           + ((32'(l) + LANES - 32'(krot_q)) % LANES) + 32'(kw_q);
      src2 = 32'(vi_q.vs1) * LINE_WORDS + 32'(row_q) * LANES
           + ((32'(l) + 2 * LANES - 32'(krot_q) - 1) % LANES) + 32'(kw_q) + 1;
      pair = {op2[l], op1[l]} >> (8 * int'(bsh_q));
      case (state_q)
        S_RD1: begin
          lane_req_o[l] = 1'b1;
          if (vi_q.op == VSLIDEDN) begin
            // bank l serves lane (l - k) mod LANES, source word w' + k
            lane_addr_o[l] = RAW'(src / LANES);
          end else begin
            lane_addr_o[l] = RAW'(32'(vi_q.vs1) * RPR + 32'(row_q));
          end
        end
        S_RD2: begin
          lane_req_o[l]  = 1'b1;
          lane_addr_o[l] = (vi_q.op == VSLIDEDN) ? RAW'(src2 / LANES)
                                                 : RAW'(32'(vi_q.vs2) * RPR + 32'(row_q));
        end
        S_RD3: begin
          lane_req_o[l]  = 1'b1;
          lane_addr_o[l] = RAW'(32'(vi_q.vd) * RPR + 32'(row_q));
        end
        S_WR: begin
          lane_req_o[l]   = (w < nw_q);
          lane_we_o[l]    = 1'b1;
          lane_addr_o[l]  = RAW'(32'(vi_q.vd) * RPR + 32'(row_q));
          lane_wdata_o[l] = (vi_q.op == VSLIDEDN) ? (slide2 ? pair[31:0] : op1[l])
                                                  : alu(vi_q, op1[l], op2[l], op3[l]);
        end
        default: ;
      endcase
    end
  end

  // ---------------- sequencer ----------------
  function automatic state_e first_state(vop_e op, logic vx);
    if (needs_vs1(op, vx)) return S_RD1;
    if (needs_vs2(op, vx)) return S_RD2;
    if (op == VMACC)       return S_RD3;
    return S_WR;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      cap_q   <= C_NONE;
      vi_q    <= '0;
      nw_q    <= '0;
      nrows_q <= '0;
      row_q   <= '0;
      op1_q   <= '0;
      op2_q   <= '0;
      op3_q   <= '0;
      krot_q  <= '0;
      kw_q    <= '0;
      bsh_q   <= '0;
    end else begin
      op1_q <= op1;
      op2_q <= op2;
      op3_q <= op3;
      cap_q <= C_NONE;
      case (state_q)
        S_IDLE:
          if (in_valid_i && legal) begin
            vi_q    <= vi_d;
            nw_q    <= nw_d;
            nrows_q <= (nw_d + 16'(LANES) - 16'd1) / 16'(LANES);
            row_q   <= '0;
            krot_q  <= LW'((kb_d >> 2) % LANES);
            kw_q    <= 16'(kb_d >> 2);
            bsh_q   <= kb_d[1:0];
            state_q <= first_state(vi_d.op, vi_d.vx);
          end
        S_RD1: begin
          cap_q <= C_OP1;
          if (needs_vs2(vi_q.op, vi_q.vx) || slide2) state_q <= S_RD2;
          else if (vi_q.op == VMACC)        state_q <= S_RD3;
          else                              state_q <= S_WR;
        end
        S_RD2: begin
          cap_q   <= C_OP2;
          state_q <= (vi_q.op == VMACC) ? S_RD3 : S_WR;
        end
        S_RD3: begin
          cap_q   <= C_OP3;
          state_q <= S_WR;
        end
        S_WR: begin
          if (row_q + 16'd1 >= nrows_q) begin
            state_q <= S_IDLE;
          end else begin
            row_q   <= row_q + 16'd1;
            state_q <= first_state(vi_q.op, vi_q.vx);
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign done_o    = (state_q == S_WR) && (row_q + 16'd1 >= nrows_q);
  assign illegal_o = (state_q == S_IDLE) && in_valid_i && !legal;
endmodule
