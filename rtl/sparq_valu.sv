// sparq_valu: vector integer ALU of a Sparq lane.
//
// Processes one 64-bit lane word per cycle, split into elements of
// SEW = 8/16/32/64 bits. Operand a is vs1, the replicated scalar rs1 or the
// replicated immediate; operand b is vs2. Per element, following the RVV 1.0
// definitions:
//   vadd: b + a    vsub: b - a    vand/vor/vxor: b op a
//   vsll: b << a   vsrl: b >> a (logical)   vsra: b >>> a (arithmetic)
//   (shift amount = low log2(SEW) bits of a)
//   vmv : a
// The paper only names the VALU; this op subset is what the lane needs to pack
// sub-byte operands at run time (shift and or) and to move partial output rows
// between registers (vmv.v.v).
// Timing: one register stage, one word per cycle; the stage holds its result
// while out_ready_i is low. Interface: valid/ready in and out.
module sparq_valu
  import sparq_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        in_valid_i,
  output logic        in_ready_o,
  input  op_e         op_i,
  input  vew_e        sew_i,
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  output logic        out_valid_o,
  input  logic        out_ready_i,
  output logic [63:0] result_o
);

  logic [63:0] res_w [4];

  for (genvar g = 0; g < 4; g++) begin : gen_width
    localparam int unsigned W  = 8 << g;
    localparam int unsigned N  = 64 / W;
    localparam int unsigned SW = $clog2(W);
    for (genvar i = 0; i < N; i++) begin : gen_elem
      logic [W-1:0]  ea, eb, er;
      logic [SW-1:0] sh;
      assign ea = a_i[i*W +: W];
      assign eb = b_i[i*W +: W];
      assign sh = ea[SW-1:0];
      always_comb begin
        unique case (op_i)
          OP_VADD: er = eb + ea;
          OP_VSUB: er = eb - ea;
          OP_VAND: er = eb & ea;
          OP_VOR:  er = eb | ea;
          OP_VXOR: er = eb ^ ea;
          OP_VSLL: er = eb << sh;
          OP_VSRL: er = eb >> sh;
          OP_VSRA: er = W'($signed(eb) >>> sh);
          default: er = ea; // OP_VMV
        endcase
      end
      assign res_w[g][i*W +: W] = er;
    end
  end

  logic        valid_q;
  logic [63:0] data_q;

  assign in_ready_o = !valid_q || out_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= 1'b0;
      data_q  <= '0;
    end else if (in_ready_o) begin
      valid_q <= in_valid_i;
      if (in_valid_i) data_q <= res_w[sew_i];
    end
  end

  assign out_valid_o = valid_q;
  assign result_o    = data_q;

endmodule
