// sparq_vmfpu: multiply/divide unit of a Sparq lane, without floating point.
//
// In Ara this unit (the VMFPU) holds the SIMD multiplier, the SIMD divider and
// the floating-point unit. Sparq removes the FPU, which is where most of the
// published area (-43.3 %) and power (-58.8 %) saving of the lane comes from,
// and extends the multiplier with vmacsr. What is left is a wrapper that
// steers one operation stream to the multiplier (vmul, vmacc, vnmsac,
// vmacsr) or to the divider (vdivu, vdiv, vremu, vrem) and merges their
// results.
//
// Interface: one valid/ready operand stream (fu_i selects the unit, op_i and
// sew_i travel with each word) and one valid/ready result stream. The lane
// runs one instruction at a time, so the two units are never busy together
// and results leave in order; if both ever offered a result, the multiplier
// would win. Timing: that of the selected unit (see sparq_simd_mul and
// sparq_simd_div).
module sparq_vmfpu
  import sparq_pkg::*;
#(
  parameter int unsigned MUL_STAGES = 2
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        in_valid_i,
  output logic        in_ready_o,
  input  fu_e         fu_i,
  input  op_e         op_i,
  input  vew_e        sew_i,
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  input  logic [63:0] c_i,
  output logic        out_valid_o,
  input  logic        out_ready_i,
  output logic [63:0] result_o
);

  logic        mul_in_valid, mul_in_ready, mul_out_valid, mul_out_ready;
  logic        div_in_valid, div_in_ready, div_out_valid, div_out_ready;
  logic [63:0] mul_result, div_result;

  assign mul_in_valid = in_valid_i && (fu_i == FU_MUL);
  assign div_in_valid = in_valid_i && (fu_i == FU_DIV);
  assign in_ready_o   = (fu_i == FU_DIV) ? div_in_ready : mul_in_ready;

  sparq_simd_mul #(.STAGES(MUL_STAGES)) i_mul (
    .clk_i, .rst_ni,
    .in_valid_i  (mul_in_valid),
    .in_ready_o  (mul_in_ready),
    .op_i, .sew_i, .a_i, .b_i, .c_i,
    .out_valid_o (mul_out_valid),
    .out_ready_i (mul_out_ready),
    .result_o    (mul_result)
  );

  sparq_simd_div i_div (
    .clk_i, .rst_ni,
    .in_valid_i  (div_in_valid),
    .in_ready_o  (div_in_ready),
    .op_i, .sew_i, .a_i, .b_i,
    .out_valid_o (div_out_valid),
    .out_ready_i (div_out_ready),
    .result_o    (div_result)
  );

  assign mul_out_ready = out_ready_i;
  assign div_out_ready = out_ready_i && !mul_out_valid;
  assign out_valid_o   = mul_out_valid || div_out_valid;
  assign result_o      = mul_out_valid ? mul_result : div_result;

endmodule
