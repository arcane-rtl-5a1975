// tb_vpu: a VPU on a small VRF (4 vector registers, 4 lanes). Registers are
// preloaded with random words through the VRF bus port; each vector
// instruction's result is read back and compared with a reference computed
// here element by element. The execution time of each instruction is checked
// against one cycle per source read plus one write cycle per row of LANES
// words (a slide of 8/16-bit elements by a non-whole number of words reads
// two source rows). Slides are checked byte by byte against a model in which
// result byte j is source byte j + amount * element size, zero past the
// vector length. Also checks that an illegal instruction is flagged and dropped.
module tb_vpu;
  import arcane_pkg::*;
  localparam int unsigned LANES = 4, VRF_BYTES = 4096;
  localparam int unsigned WORDS = VRF_BYTES / 4, ROWS = WORDS / LANES, RAW = $clog2(ROWS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, busy, done, illegal;
  logic [31:0] instr, rs1, rs2;
  logic [LANES-1:0] l_req, l_we;
  logic [LANES-1:0][RAW-1:0] l_addr;
  logic [LANES-1:0][31:0] l_wdata, l_rdata;
  logic b_req, b_we, b_gnt, b_rvalid;
  logic [9:0] b_addr;
  logic [31:0] b_wdata, b_rdata;
  logic [31:0] model [WORDS];

  vpu #(.LANES(LANES), .VRF_BYTES(VRF_BYTES)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_instr_i(instr), .in_rs1_i(rs1), .in_rs2_i(rs2), .busy_o(busy), .done_o(done),
    .illegal_o(illegal), .lane_req_o(l_req), .lane_we_o(l_we), .lane_addr_o(l_addr),
    .lane_wdata_o(l_wdata), .lane_rdata_i(l_rdata));

  vrf #(.LANES(LANES), .VRF_BYTES(VRF_BYTES)) u_vrf (
    .clk_i(clk), .rst_ni(rst_n), .lane_req_i(l_req), .lane_we_i(l_we), .lane_addr_i(l_addr),
    .lane_wdata_i(l_wdata), .lane_rdata_o(l_rdata), .bus_req_i(b_req), .bus_we_i(b_we),
    .bus_be_i(4'hf), .bus_addr_i(b_addr), .bus_wdata_i(b_wdata), .bus_gnt_o(b_gnt),
    .bus_rvalid_o(b_rvalid), .bus_rdata_o(b_rdata));

  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference element operation
  function automatic logic [31:0] ref_el(vop_e op, int sew, logic [31:0] a, logic [31:0] b,
                                         logic [31:0] c);
    logic [31:0] r;
    int n, w;
    w = 8 << sew; n = 32 / w;
    r = 0;
    for (int e = 0; e < n; e++) begin
      longint sa, sb, sc, t;
      sa = longint'(a >> (e * w)); sb = longint'(b >> (e * w)); sc = longint'(c >> (e * w));
      sa = (sa << (64 - w)) >>> (64 - w);
      sb = (sb << (64 - w)) >>> (64 - w);
      sc = (sc << (64 - w)) >>> (64 - w);
      case (op)
        VADD: t = sa + sb;
        VSUB: t = sa - sb;
        VMUL: t = sa * sb;
        VMACC: t = sc + sa * sb;
        VMAX: t = (sa > sb) ? sa : sb;
        VMIN: t = (sa < sb) ? sa : sb;
        VSRA: t = sa >>> (b[4:0]);
        default: t = sa;
      endcase
      for (int k = 0; k < w; k++) r[e * w + k] = t[k];
    end
    return r;
  endfunction

  function automatic logic [31:0] splat(int sew, logic [31:0] s);
    case (sew)
      0: return {4{s[7:0]}};
      1: return {2{s[15:0]}};
      default: return s;
    endcase
  endfunction

  task automatic bus_write(int w, logic [31:0] d);
    @(negedge clk); b_req = 1; b_we = 1; b_addr = 10'(w); b_wdata = d;
    @(negedge clk); b_req = 0; b_we = 0;
  endtask
  task automatic bus_read(int w, output logic [31:0] d);
    @(negedge clk); b_req = 1; b_we = 0; b_addr = 10'(w);
    @(negedge clk); b_req = 0; d = b_rdata;
  endtask

  // issue one instruction and measure cycles until done
  task automatic run(vop_e op, bit vx, int sew, int vd, int vs1, int vs2,
                     logic [31:0] scalar, int vl, int exp_cycles, string name);
    int cyc;
    logic [31:0] ref_w [256];
    int nw;
    nw = (sew == 0) ? (vl + 3) / 4 : (sew == 1) ? (vl + 1) / 2 : vl;
    // reference
    for (int w = 0; w < 256; w++) begin
      logic [31:0] a, b, c;
      a = model[vs1 * 256 + w];
      b = vx ? splat(sew, scalar) : model[vs2 * 256 + w];
      c = model[vd * 256 + w];
      if (op == VSLIDEDN) begin
        // byte j of the result is source byte j + amount * element size,
        // zero from the vector length on
        int kb;
        kb = int'(scalar) << sew;
        for (int b = 0; b < 4; b++) begin
          int sb;
          sb = 4 * w + b + kb;
          ref_w[w][8*b +: 8] = (sb < 4 * nw) ? model[vs1 * 256 + sb / 4][8 * (sb % 4) +: 8] : 8'h00;
        end
      end
      else if (op == VMV) ref_w[w] = vx ? splat(sew, scalar) : a;
      else if (op == VSRA && vx) ref_w[w] = ref_el(op, sew, a, {27'd0, scalar[4:0]}, c);
      else ref_w[w] = ref_el(op, sew, a, b, c);
    end
    @(negedge clk);
    in_valid = 1; instr = {6'(op), vx, 5'(vs2), 5'(vs1), 3'(sew), 5'(vd), OPC_VEC};
    rs1 = scalar; rs2 = 32'(vl);
    @(posedge clk); #1 in_valid = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); #1 cyc++; end
    @(posedge clk); #1 cyc++;
    check(cyc == exp_cycles, $sformatf("%s cycles %0d expected %0d", name, cyc, exp_cycles));
    for (int w = 0; w < nw; w++) model[vd * 256 + w] = ref_w[w];
    for (int w = 0; w < 256; w++) begin
      logic [31:0] d;
      bus_read(vd * 256 + w, d);
      checks++;
      if (d != model[vd * 256 + w]) begin
        failures++;
        if (failures < 10) $display("FAIL %s word %0d: %h expected %h", name, w, d, model[vd*256+w]);
      end
    end
  endtask

  initial begin
    in_valid = 0; instr = 0; rs1 = 0; rs2 = 0;
    b_req = 0; b_we = 0; b_addr = 0; b_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < WORDS; w++) begin
      model[w] = $urandom;
      bus_write(w, model[w]);
    end
    // rows = 64 for 256 words
    run(VADD,  0, 2, 2, 0, 1, 0,          256, 3 * 64, "vadd.vv e32");
    run(VSUB,  0, 1, 3, 0, 1, 0,          512, 3 * 64, "vsub.vv e16");
    run(VMUL,  0, 0, 2, 1, 3, 0,         1024, 3 * 64, "vmul.vv e8");
    run(VMACC, 1, 0, 2, 0, 0, 32'd3,     1024, 3 * 64, "vmacc.vx e8");
    run(VMACC, 0, 2, 3, 0, 1, 0,          256, 4 * 64, "vmacc.vv e32");
    run(VMAX,  0, 1, 2, 0, 3, 0,          512, 3 * 64, "vmax.vv e16");
    run(VMIN,  1, 2, 1, 2, 0, 32'hFFFF_FF00, 256, 2 * 64, "vmin.vx e32");
    run(VSRA,  1, 0, 3, 1, 0, 32'd2,     1024, 2 * 64, "vsra.vx e8");
    run(VSLIDEDN, 0, 2, 0, 3, 0, 32'd5,   256, 2 * 64, "vslidedown 5");
    run(VSLIDEDN, 0, 2, 1, 2, 0, 32'd4,   256, 2 * 64, "vslidedown 4");
    run(VSLIDEDN, 0, 0, 3, 1, 0, 32'd4,  1024, 2 * 64, "vslidedown e8 by 4 (one word)");
    run(VSLIDEDN, 0, 0, 0, 2, 0, 32'd7,  1024, 3 * 64, "vslidedown e8 by 7");
    run(VSLIDEDN, 0, 1, 2, 3, 0, 32'd3,   512, 3 * 64, "vslidedown e16 by 3");
    run(VSLIDEDN, 0, 0, 1, 0, 0, 32'd1,   100, 3 * 7, "vslidedown e8 by 1, vl=100");
    run(VMV,   1, 2, 2, 0, 0, 32'h1234_5678, 256, 1 * 64, "vmv.vx");
    run(VADD,  0, 2, 3, 0, 1, 0,           10, 3 * 3, "vadd short vl=10");
    // illegal operation
    @(negedge clk); in_valid = 1; instr = {6'd40, 1'b0, 5'd0, 5'd0, 3'd2, 5'd0, OPC_VEC}; rs2 = 32'd8;
    #1 check(illegal, "illegal op flagged");
    @(negedge clk); in_valid = 0;
    check(!busy, "illegal op not executed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
