// sparq_decoder: instruction decoder for the operations a Sparq lane executes.
//
// Purely combinational. It takes a 32-bit RISC-V instruction together with
// the value of its scalar source register rs1 (as forwarded by the scalar
// core) and produces a decoded vector operation (sparq_pkg::vop_t) or raises
// `illegal`.
//
// Sparq's change to the Ara dispatcher is the decoding of the custom
// multiply-shift-accumulate vmacsr: funct6 = 101110, the free slot right after
// vmacc, accepted in OPMVV (vmacsr.vv, funct3 = 010) and OPMVX (vmacsr.vx,
// funct3 = 110) formats, major opcode OP-V (1010111).
//
// Besides vmacsr the decoder accepts the integer subset a lane needs to run
// the packed sub-byte convolution (this subset is this design's choice):
//   OPIVV/OPIVX/OPIVI : vadd, vsub (not .vi), vand, vor, vxor, vsll, vsrl,
//                       vsra, vmv.v.v / vmv.v.x / vmv.v.i
//   OPMVV/OPMVX       : vmul, vmacc, vnmsac, vmacsr, vdivu, vdiv, vremu, vrem
// Masked execution (vm = 0) is reported illegal because the lane has no mask
// unit. Immediates are simm5 sign-extended, except for shifts where uimm5 is
// zero-extended, as in the RVV 1.0 specification.
//
// Interface: instr_i, rs1_value_i in; vop_o, illegal_o out; no clock.
module sparq_decoder
  import sparq_pkg::*;
(
  input  logic [31:0] instr_i,
  input  logic [63:0] rs1_value_i,
  output vop_t        vop_o,
  output logic        illegal_o
);

  logic [5:0] funct6;
  logic       vm;
  logic [4:0] vs2, vs1_rs1, vd;
  logic [2:0] funct3;
  logic [6:0] opcode;

  assign {funct6, vm, vs2, vs1_rs1, funct3, vd, opcode} = instr_i;

  always_comb begin
    vop_o        = '0;
    vop_o.vd     = vd;
    vop_o.vs1    = vs1_rs1;
    vop_o.vs2    = vs2;
    vop_o.op     = OP_VADD;
    vop_o.fu     = FU_VALU;
    vop_o.a_src  = SRC_VREG;
    vop_o.scalar = '0;
    illegal_o    = 1'b0;

    unique case (funct3)
      OPIVX, OPMVX: begin
        vop_o.a_src  = SRC_SCALAR;
        vop_o.scalar = rs1_value_i;
      end
      OPIVI: begin
        vop_o.a_src  = SRC_IMM;
        vop_o.scalar = {{59{vs1_rs1[4]}}, vs1_rs1};
      end
      default: ;
    endcase

    unique case (funct3)
      OPIVV, OPIVX, OPIVI: begin
        vop_o.fu = FU_VALU;
        unique case (funct6)
          F6_VADD: vop_o.op = OP_VADD;
          F6_VSUB: begin
            vop_o.op = OP_VSUB;
            if (funct3 == OPIVI) illegal_o = 1'b1;
          end
          F6_VAND: vop_o.op = OP_VAND;
          F6_VOR:  vop_o.op = OP_VOR;
          F6_VXOR: vop_o.op = OP_VXOR;
          F6_VSLL, F6_VSRL, F6_VSRA: begin
            vop_o.op = (funct6 == F6_VSLL) ? OP_VSLL :
                       (funct6 == F6_VSRL) ? OP_VSRL : OP_VSRA;
            if (funct3 == OPIVI) vop_o.scalar = {59'd0, vs1_rs1};
          end
          F6_VMERGE: begin
            vop_o.op = OP_VMV;
            if (vs2 != 5'd0) illegal_o = 1'b1;
          end
          default: illegal_o = 1'b1;
        endcase
      end
      OPMVV, OPMVX: begin
        vop_o.fu = FU_MUL;
        unique case (funct6)
          F6_VMUL:   vop_o.op = OP_VMUL;
          F6_VMACC:  vop_o.op = OP_VMACC;
          F6_VNMSAC: vop_o.op = OP_VNMSAC;
          F6_VMACSR: vop_o.op = OP_VMACSR;
          F6_VDIVU:  begin vop_o.op = OP_VDIVU; vop_o.fu = FU_DIV; end
          F6_VDIV:   begin vop_o.op = OP_VDIV;  vop_o.fu = FU_DIV; end
          F6_VREMU:  begin vop_o.op = OP_VREMU; vop_o.fu = FU_DIV; end
          F6_VREM:   begin vop_o.op = OP_VREM;  vop_o.fu = FU_DIV; end
          default:   illegal_o = 1'b1;
        endcase
      end
      default: illegal_o = 1'b1; // OPF* (no FPU), OPCFG (handled by the scalar core)
    endcase

    if (opcode != OPCODE_OPV) illegal_o = 1'b1;
    if (!vm)                  illegal_o = 1'b1;
  end

endmodule
