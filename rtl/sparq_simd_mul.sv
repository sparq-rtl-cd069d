// sparq_simd_mul: SIMD integer multiplier of a Sparq lane, with vmacsr.
//
// Processes one 64-bit lane word per cycle, split into 8/4/2/1 elements of
// SEW = 8/16/32/64 bits. For every element it computes, from operand a (vs1
// or the replicated scalar rs1), b (vs2) and c (the old value of vd):
//   vmul   : (a*b) mod 2^SEW
//   vmacc  : c + (a*b)                    mod 2^SEW
//   vnmsac : c - (a*b)                    mod 2^SEW
//   vmacsr : c + (((a*b) mod 2^SEW) >> SEW/2)   mod 2^SEW   (Sparq)
// vmacsr is the multiply-shift-accumulate that Sparq adds to Ara's
// multiplier: a logical right shift by a hard-wired half of the element width
// sits between the product and the accumulation. With two sub-byte operands
// packed per element as (a0 + 2^(SEW/2) a1) and (w1 + 2^(SEW/2) w0), the
// upper half of the truncated product is a0*w0 + a1*w1, so the shift moves
// the packed dot product to the low bits before it is accumulated. The shift
// amount and the element-wise semantics follow the paper; the pipeline depth
// and the handshake are this design's own.
//
// Timing: STAGES register stages (default 2) after the combinational
// multiply. One word accepted per cycle; the whole pipeline stalls while the
// last stage holds a result that out_ready_i does not take.
// Interface: valid/ready on input and output; op_i and sew_i travel with the
// operands.
module sparq_simd_mul
  import sparq_pkg::*;
#(
  parameter int unsigned STAGES = 2
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        in_valid_i,
  output logic        in_ready_o,
  input  op_e         op_i,
  input  vew_e        sew_i,
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  input  logic [63:0] c_i,
  output logic        out_valid_o,
  input  logic        out_ready_i,
  output logic [63:0] result_o
);

  logic [63:0] res_w [4];  // result for each element width
  logic [63:0] res;

  for (genvar g = 0; g < 4; g++) begin : gen_width
    localparam int unsigned W = 8 << g;
    localparam int unsigned N = 64 / W;
    for (genvar i = 0; i < N; i++) begin : gen_elem
      logic [W-1:0] ea, eb, ec, prod, er;
      assign ea   = a_i[i*W +: W];
      assign eb   = b_i[i*W +: W];
      assign ec   = c_i[i*W +: W];
      assign prod = ea * eb;
      always_comb begin
        unique case (op_i)
          OP_VMACC:  er = ec + prod;
          OP_VNMSAC: er = ec - prod;
          OP_VMACSR: er = ec + (prod >> (W / 2));
          default:   er = prod;
        endcase
      end
      assign res_w[g][i*W +: W] = er;
    end
  end

  assign res = res_w[sew_i];

  // Output pipeline.
  logic [STAGES-1:0] valid_q;
  logic [63:0]       data_q [STAGES];
  logic              advance;

  assign advance    = !valid_q[STAGES-1] || out_ready_i;
  assign in_ready_o = advance;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0;
      for (int s = 0; s < STAGES; s++) data_q[s] <= '0;
    end else if (advance) begin
      valid_q[0] <= in_valid_i;
      if (in_valid_i) data_q[0] <= res;
      for (int s = 1; s < STAGES; s++) begin
        valid_q[s] <= valid_q[s-1];
        data_q[s]  <= data_q[s-1];
      end
    end
  end

  assign out_valid_o = valid_q[STAGES-1];
  assign result_o    = data_q[STAGES-1];

  // The producer must hold its word while it is not accepted.
  property p_hold_out;
    @(posedge clk_i) disable iff (!rst_ni)
      out_valid_o && !out_ready_i |=> out_valid_o && $stable(result_o);
  endproperty
  assert property (p_hold_out);

endmodule
