// tb_sparq_decoder: self-checking testbench of the instruction decoder.
//
// Checks the two vmacsr encodings of the published example bit for bit
// (vmacsr v0, x1, v2 and vmacsr v0, v1, v2), every supported operation in
// every format with random register fields, the immediate handling, and that
// floating-point, configuration, masked and unknown encodings are refused.
module tb_sparq_decoder;
  import sparq_pkg::*;

  logic [31:0] instr;
  logic [63:0] rs1;
  vop_t        vop;
  logic        illegal;
  int checks = 0, failures = 0;

  sparq_decoder dut (.instr_i(instr), .rs1_value_i(rs1), .vop_o(vop), .illegal_o(illegal));

  task automatic check(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (instr %h)", what, got, exp, instr);
    end
  endtask

  function automatic logic [31:0] enc(input logic [5:0] f6, input logic vm, input logic [4:0] vs2,
                                      input logic [4:0] vs1, input logic [2:0] f3, input logic [4:0] vd);
    return {f6, vm, vs2, vs1, f3, vd, 7'b1010111};
  endfunction

  typedef struct { logic [5:0] f6; logic mform; op_e op; fu_e fu; logic vi; } entry_t;
  entry_t tab [17] = '{
    '{6'b000000, 0, OP_VADD,   FU_VALU, 1}, '{6'b000010, 0, OP_VSUB,   FU_VALU, 0},
    '{6'b001001, 0, OP_VAND,   FU_VALU, 1}, '{6'b001010, 0, OP_VOR,    FU_VALU, 1},
    '{6'b001011, 0, OP_VXOR,   FU_VALU, 1}, '{6'b100101, 0, OP_VSLL,   FU_VALU, 1},
    '{6'b101000, 0, OP_VSRL,   FU_VALU, 1}, '{6'b101001, 0, OP_VSRA,   FU_VALU, 1},
    '{6'b010111, 0, OP_VMV,    FU_VALU, 1},
    '{6'b100101, 1, OP_VMUL,   FU_MUL,  0}, '{6'b101101, 1, OP_VMACC,  FU_MUL,  0},
    '{6'b101111, 1, OP_VNMSAC, FU_MUL,  0}, '{6'b101110, 1, OP_VMACSR, FU_MUL,  0},
    '{6'b100000, 1, OP_VDIVU,  FU_DIV,  0}, '{6'b100001, 1, OP_VDIV,   FU_DIV,  0},
    '{6'b100010, 1, OP_VREMU,  FU_DIV,  0}, '{6'b100011, 1, OP_VREM,   FU_DIV,  0}
  };

  initial begin
    // Published examples (the vm bit is shown as don't-care; 1 = unmasked here).
    rs1 = 64'h1234_5678_9ABC_DEF0;
    instr = 32'b101110_1_00010_00001_110_00000_1010111; #1;  // vmacsr v0, x1, v2
    check(illegal, 0, "vx legal");
    check(vop.op, OP_VMACSR, "vx op");
    check(vop.fu, FU_MUL, "vx fu");
    check(vop.a_src, SRC_SCALAR, "vx src");
    check(vop.scalar, rs1, "vx scalar");
    check({vop.vd, vop.vs2}, {5'd0, 5'd2}, "vx regs");
    instr = 32'b101110_1_00010_00001_010_00000_1010111; #1;  // vmacsr v0, v1, v2
    check(illegal, 0, "vv legal");
    check(vop.op, OP_VMACSR, "vv op");
    check(vop.a_src, SRC_VREG, "vv src");
    check({vop.vd, vop.vs1, vop.vs2}, {5'd0, 5'd1, 5'd2}, "vv regs");

    for (int n = 0; n < 400; n++) begin
      entry_t e;
      logic [4:0] vd, vs1, vs2;
      int form;
      e = tab[$urandom_range(0, 16)];
      vd = 5'($urandom); vs1 = 5'($urandom);
      vs2 = (e.op == OP_VMV) ? 5'd0 : 5'($urandom);
      rs1 = {$urandom, $urandom};
      form = $urandom_range(0, 2); // 0: .vv, 1: .vx, 2: .vi
      if (form == 2 && !e.vi) form = 1;
      instr = enc(e.f6, 1'b1, vs2, vs1,
                  e.mform ? (form == 0 ? 3'b010 : 3'b110)
                          : (form == 0 ? 3'b000 : form == 1 ? 3'b100 : 3'b011), vd);
      #1;
      check(illegal, 0, "legal");
      check(vop.op, e.op, "op");
      check(vop.fu, e.fu, "fu");
      check({vop.vd, vop.vs2}, {vd, vs2}, "regs");
      if (form == 0) begin
        check(vop.a_src, SRC_VREG, "src v");
        check(vop.vs1, vs1, "vs1");
      end else if (form == 1) begin
        check(vop.a_src, SRC_SCALAR, "src x");
        check(vop.scalar, rs1, "scalar");
      end else begin
        check(vop.a_src, SRC_IMM, "src i");
        if (e.op inside {OP_VSLL, OP_VSRL, OP_VSRA}) check(vop.scalar, {59'd0, vs1}, "uimm");
        else check(vop.scalar, {{59{vs1[4]}}, vs1}, "simm");
      end
      // Same instruction masked: refused.
      instr[25] = 1'b0; #1;
      check(illegal, 1, "masked refused");
    end

    // Refused encodings.
    instr = enc(6'b000000, 1, 5'd1, 5'd2, 3'b001, 5'd3); #1; check(illegal, 1, "OPFVV");
    instr = enc(6'b000000, 1, 5'd1, 5'd2, 3'b101, 5'd3); #1; check(illegal, 1, "OPFVF");
    instr = enc(6'b000000, 1, 5'd1, 5'd2, 3'b111, 5'd3); #1; check(illegal, 1, "OPCFG");
    instr = enc(6'b000010, 1, 5'd1, 5'd2, 3'b011, 5'd3); #1; check(illegal, 1, "vsub.vi");
    instr = enc(6'b010111, 1, 5'd1, 5'd2, 3'b000, 5'd3); #1; check(illegal, 1, "vmerge vs2!=0");
    instr = enc(6'b110000, 1, 5'd1, 5'd2, 3'b010, 5'd3); #1; check(illegal, 1, "unknown OPM");
    instr = enc(6'b101100, 1, 5'd1, 5'd2, 3'b110, 5'd3); #1; check(illegal, 1, "unknown OPM 2");
    instr = enc(6'b110000, 1, 5'd1, 5'd2, 3'b000, 5'd3); #1; check(illegal, 1, "unknown OPI");
    instr = 32'b101110_1_00010_00001_110_00000_0110011;  #1; check(illegal, 1, "not OP-V");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
