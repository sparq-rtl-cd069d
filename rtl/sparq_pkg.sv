// sparq_pkg: types and constants shared by the Sparq vector lane.
//
// Sparq is a 64-bit RISC-V "V" vector processor (an Ara derivative) whose
// lane has no floating-point unit and whose SIMD multiplier adds one custom
// instruction, vmacsr (vector multiply-shift-accumulate):
//     vd[i] <- vd[i] + ((vs1[i] * vs2[i]) >> SEW/2)
// The vmacsr encoding (funct6 = 101110, the free slot after vmacc, in both
// OPMVV and OPMVX formats) follows the published encoding example. The other
// funct6/funct3 values are those of the RISC-V "V" 1.0 specification. The
// internal operation enum and the decoded operation struct are this design's
// own. The machine sizes are parameters of sparq_lane.
package sparq_pkg;

  // ---------------------------------------------------------------------
  // Element width (vsew)
  // ---------------------------------------------------------------------
  typedef enum logic [1:0] {
    EW8  = 2'd0,
    EW16 = 2'd1,
    EW32 = 2'd2,
    EW64 = 2'd3
  } vew_e;

  // ---------------------------------------------------------------------
  // RVV instruction fields
  // ---------------------------------------------------------------------
  localparam logic [6:0] OPCODE_OPV = 7'b1010111;

  typedef enum logic [2:0] {
    OPIVV = 3'b000,
    OPFVV = 3'b001,
    OPMVV = 3'b010,
    OPIVI = 3'b011,
    OPIVX = 3'b100,
    OPFVF = 3'b101,
    OPMVX = 3'b110,
    OPCFG = 3'b111
  } funct3_e;

  // OPI* funct6 values
  localparam logic [5:0] F6_VADD   = 6'b000000;
  localparam logic [5:0] F6_VSUB   = 6'b000010;
  localparam logic [5:0] F6_VAND   = 6'b001001;
  localparam logic [5:0] F6_VOR    = 6'b001010;
  localparam logic [5:0] F6_VXOR   = 6'b001011;
  localparam logic [5:0] F6_VMERGE = 6'b010111; // vmv.v.* when vm = 1
  localparam logic [5:0] F6_VSLL   = 6'b100101;
  localparam logic [5:0] F6_VSRL   = 6'b101000;
  localparam logic [5:0] F6_VSRA   = 6'b101001;
  // OPM* funct6 values
  localparam logic [5:0] F6_VDIVU  = 6'b100000;
  localparam logic [5:0] F6_VDIV   = 6'b100001;
  localparam logic [5:0] F6_VREMU  = 6'b100010;
  localparam logic [5:0] F6_VREM   = 6'b100011;
  localparam logic [5:0] F6_VMUL   = 6'b100101;
  localparam logic [5:0] F6_VMACC  = 6'b101101;
  localparam logic [5:0] F6_VMACSR = 6'b101110; // custom, Sparq
  localparam logic [5:0] F6_VNMSAC = 6'b101111;

  // ---------------------------------------------------------------------
  // Internal operations
  // ---------------------------------------------------------------------
  typedef enum logic [4:0] {
    OP_VADD, OP_VSUB, OP_VAND, OP_VOR, OP_VXOR,
    OP_VSLL, OP_VSRL, OP_VSRA, OP_VMV,
    OP_VMUL, OP_VMACC, OP_VNMSAC, OP_VMACSR,
    OP_VDIVU, OP_VDIV, OP_VREMU, OP_VREM
  } op_e;

  typedef enum logic [1:0] {
    FU_VALU = 2'd0,
    FU_MUL  = 2'd1,
    FU_DIV  = 2'd2
  } fu_e;

  // Where operand A (the vs1 position) comes from.
  typedef enum logic [1:0] {
    SRC_VREG   = 2'd0, // vs1 from the VRF
    SRC_SCALAR = 2'd1, // rs1 from the scalar core
    SRC_IMM    = 2'd2  // simm5 / uimm5 from the instruction
  } src_e;

  typedef struct packed {
    op_e         op;
    fu_e         fu;
    src_e        a_src;
    logic [4:0]  vd;
    logic [4:0]  vs1;
    logic [4:0]  vs2;
    logic [63:0] scalar; // rs1 value or sign-extended immediate
  } vop_t;

  // Per-cycle events of a lane, for performance counters.
  typedef struct packed {
    logic fetch_stall;  // operand fetch held back: operand queues full
    logic tail_write;   // last word written with partial byte enables
    logic vmacsr_word;  // one word of vmacsr written back
  } lane_events_t;

  // Replicate the low SEW bits of a scalar over a 64-bit lane word.
  function automatic logic [63:0] replicate(input logic [63:0] s, input vew_e sew);
    unique case (sew)
      EW8:     replicate = {8{s[7:0]}};
      EW16:    replicate = {4{s[15:0]}};
      EW32:    replicate = {2{s[31:0]}};
      default: replicate = s;
    endcase
  endfunction

  // Bytes per element.
  function automatic int unsigned ew_bytes(input vew_e sew);
    ew_bytes = 1 << sew;
  endfunction

endpackage
