// sparq_simd_div: integer divider of a Sparq lane (vdivu, vdiv, vremu, vrem).
//
// The published lane keeps Ara's multiply/divide unit and drops only its FPU;
// the paper names the divider but does not describe it. This one is the
// simplest correct choice: a single restoring divider that walks through the
// elements of one 64-bit lane word one after the other, one quotient bit per
// cycle. Signed operations divide magnitudes and fix the signs afterwards.
// Results follow the RVV 1.0 rules: vd = vs2 / vs1 (or vs2 % vs1); division
// by zero gives an all-ones quotient and returns the dividend as remainder;
// signed overflow (most negative / -1) gives the dividend and remainder 0.
//
// Interface: valid/ready in, valid/ready out; a_i is the divisor (vs1 or the
// replicated rs1), b_i the dividend (vs2).
// Timing: a word takes (64/SEW) * (SEW + 2) cycles (72 at SEW=16),
// then its result waits in the output register until out_ready_i. A new word
// is accepted only when the unit is idle.
module sparq_simd_div
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

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_ITER, S_DONE} state_e;

  state_e      state_q;
  op_e         op_q;
  vew_e        sew_q;
  logic [63:0] a_q, b_q, res_q;
  logic [3:0]  elem_q;      // element index within the word
  logic [6:0]  bit_q;       // remaining quotient bits
  logic [63:0] nmag_q, dmag_q, quo_q, nraw_q, rem_q;
  logic        neg_q_q, neg_r_q, dzero_q;

  logic        is_signed, is_rem;
  logic [6:0]  w;           // element width in bits
  logic [3:0]  nelem;
  logic [63:0] mask;
  logic [63:0] n_el, d_el;
  logic        sn, sd;
  logic [64:0] rem_sh;
  logic [63:0] q_fin, r_fin, el_fin;

  assign is_signed = (op_q == OP_VDIV) || (op_q == OP_VREM);
  assign is_rem    = (op_q == OP_VREMU) || (op_q == OP_VREM);
  assign w         = 7'd8 << sew_q;
  assign nelem     = 4'd8 >> sew_q;
  assign mask      = (sew_q == EW64) ? '1 : ((64'd1 << w) - 64'd1);

  // Current element, sign and magnitude.
  assign n_el = (b_q >> (elem_q * w)) & mask;
  assign d_el = (a_q >> (elem_q * w)) & mask;
  assign sn   = is_signed && n_el[w-1];
  assign sd   = is_signed && d_el[w-1];

  // One restoring step.
  assign rem_sh = {rem_q[63:0], nmag_q[bit_q-1]};

  // Final element value.
  always_comb begin
    q_fin = neg_q_q ? (-quo_q) & mask : quo_q;
    r_fin = neg_r_q ? (-rem_q) & mask : rem_q;
    if (dzero_q) begin
      q_fin = mask;
      r_fin = nraw_q;
    end
    el_fin = is_rem ? r_fin : q_fin;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      op_q    <= OP_VDIVU;
      sew_q   <= EW8;
      a_q     <= '0;
      b_q     <= '0;
      res_q   <= '0;
      elem_q  <= '0;
      bit_q   <= '0;
      nmag_q  <= '0;
      dmag_q  <= '0;
      quo_q   <= '0;
      nraw_q  <= '0;
      rem_q   <= '0;
      neg_q_q <= 1'b0;
      neg_r_q <= 1'b0;
      dzero_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (in_valid_i) begin
          op_q    <= op_i;
          sew_q   <= sew_i;
          a_q     <= a_i;
          b_q     <= b_i;
          res_q   <= '0;
          elem_q  <= '0;
          state_q <= S_SETUP;
        end
        S_SETUP: begin
          nraw_q  <= n_el;
          nmag_q  <= sn ? (-n_el) & mask : n_el;
          dmag_q  <= sd ? (-d_el) & mask : d_el;
          dzero_q <= (d_el == '0);
          neg_q_q <= sn ^ sd;
          neg_r_q <= sn;
          rem_q   <= '0;
          quo_q   <= '0;
          bit_q   <= w;
          state_q <= S_ITER;
        end
        S_ITER: begin
          if (bit_q != 0) begin
            if (rem_sh >= {1'b0, dmag_q}) begin
              rem_q <= 64'(rem_sh - {1'b0, dmag_q});
              quo_q <= quo_q | (64'd1 << (bit_q - 1));
            end else begin
              rem_q <= rem_sh[63:0];
            end
            bit_q <= bit_q - 7'd1;
          end else begin
            res_q <= res_q | (el_fin << (elem_q * w));
            if (elem_q == nelem - 4'd1) begin
              state_q <= S_DONE;
            end else begin
              elem_q  <= elem_q + 4'd1;
              state_q <= S_SETUP;
            end
          end
        end
        S_DONE: if (out_ready_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign in_ready_o  = (state_q == S_IDLE);
  assign out_valid_o = (state_q == S_DONE);
  assign result_o    = res_q;

endmodule
