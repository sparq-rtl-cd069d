// sparq_lane: one lane of the Sparq vector processor (top of this design).
//
// Sparq is Ara, a 64-bit RISC-V "V" vector processor, with its floating-point
// unit removed and one instruction added: vmacsr, vd <- vd + ((vs1*vs2) >> SEW/2),
// which lets ULPPACK-style packed sub-byte dot products accumulate without
// overflowing. The published physical implementation is one lane of a 4-lane
// machine: the vector register file (VRF), the operand queues (OQ), the VALU
// and the multiply/divide unit (MUL/DIV). This module is that lane, plus the
// decoding of the instructions it executes.
//
// How it works. An instruction is offered on instr_* together with the value
// of its scalar register rs1, the element width and the number of elements
// this lane holds (vl_i). sparq_decoder turns it into an operation; an illegal
// instruction is refused with a one-cycle illegal_o pulse. The lane then
// streams the vector word by word (64 bits, 8/4/2/1 elements): it reads word
// w of vs1, vs2 and vd from the VRF, pushes the three words into three
// operand queues, and the selected unit (sparq_valu or sparq_vmfpu) pops them
// once all three are present. Results are written back to word w of vd. Reads
// run ahead of the unit by at most OQ_DEPTH words (credit counting), so a slow
// divider stalls the reads instead of overflowing the queues. For .vx/.vi
// forms the scalar, truncated to SEW and replicated, replaces vs1. The last
// word is written with byte enables, so elements past vl keep their old
// value (tail undisturbed). done_o pulses in the cycle the last word is
// written; the next instruction is accepted in the following cycle. vl_i = 0
// makes an accepted instruction a no-op. events_o flags, per cycle, a fetch
// held back by full operand queues, a partial tail write and a vmacsr word
// written, for performance counters.
//
// What is the paper's and what is not: the vmacsr semantics and encoding, the
// FPU-less multiply/divide unit, the four parts of the lane and the VRF size
// come from the paper. The paper builds its lane from Ara's; Ara's lane
// sequencer (which overlaps and chains instructions) is replaced here by a
// one-instruction-at-a-time sequencer, the VRF by a 3-read/1-write array, and
// masking is not supported. The load/store unit and the slide unit sit
// between lanes and are outside the lane: they reach the VRF through the
// ext_* port, which is granted only while the lane is idle.
//
// Timing: an instruction of n words through the VALU finishes n + 3 cycles
// after acceptance, through the multiplier n + 2 + MUL_STAGES cycles.
module sparq_lane
  import sparq_pkg::*;
#(
  parameter int unsigned NR_VREGS   = 32,
  parameter int unsigned VLEN       = 4096,
  parameter int unsigned NR_LANES   = 4,
  parameter int unsigned OQ_DEPTH   = 4,
  parameter int unsigned MUL_STAGES = 2,
  localparam int unsigned WORDS_PER_VREG = VLEN / NR_LANES / 64,
  localparam int unsigned AW             = $clog2(NR_VREGS * WORDS_PER_VREG),
  localparam int unsigned VLW            = $clog2(WORDS_PER_VREG * 8 + 1)
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  // Instruction from the dispatcher / scalar core
  input  logic           instr_valid_i,
  output logic           instr_ready_o,
  input  logic [31:0]    instr_i,
  input  logic [63:0]    rs1_value_i,
  input  vew_e           vsew_i,
  input  logic [VLW-1:0] vl_i,        // elements held by this lane
  output logic           done_o,
  output logic           illegal_o,
  output logic           busy_o,
  output lane_events_t   events_o,
  // VRF access for the load/store and slide units (not part of the lane)
  input  logic           ext_req_i,
  input  logic           ext_we_i,
  input  logic [7:0]     ext_be_i,
  input  logic [AW-1:0]  ext_addr_i,
  input  logic [63:0]    ext_wdata_i,
  output logic           ext_gnt_o,
  output logic           ext_rvalid_o,
  output logic [63:0]    ext_rdata_o
);

  typedef enum logic {S_IDLE, S_RUN} state_e;
  localparam int unsigned CW = $clog2(WORDS_PER_VREG + 1);
  localparam int unsigned QW = $clog2(OQ_DEPTH + 1);

  state_e        state_q;
  vop_t          vop_q, dec_vop;
  logic          dec_illegal;
  vew_e          sew_q;
  logic [CW-1:0] nwords_q, rd_cnt_q, wr_cnt_q;
  logic [2:0]    tail_q;
  logic [QW-1:0] inflight_q;
  logic          rvalid_q;
  logic [63:0]   a_rep;

  // -------------------------------------------------------------------
  // Decode and accept
  // -------------------------------------------------------------------
  sparq_decoder i_decoder (
    .instr_i     (instr_i),
    .rs1_value_i (rs1_value_i),
    .vop_o       (dec_vop),
    .illegal_o   (dec_illegal)
  );

  logic        accept;
  logic [11:0] nbytes;

  assign instr_ready_o = (state_q == S_IDLE);
  assign accept        = instr_valid_i && instr_ready_o;
  assign illegal_o     = accept && dec_illegal;
  assign busy_o        = (state_q != S_IDLE);
  assign nbytes        = 12'(vl_i) << vsew_i;

  // -------------------------------------------------------------------
  // VRF
  // -------------------------------------------------------------------
  logic [2:0]    vrf_re;
  logic [AW-1:0] vrf_raddr [3];
  logic [63:0]   vrf_rdata [3];
  logic          vrf_we;
  logic [7:0]    vrf_wbe;
  logic [AW-1:0] vrf_waddr;
  logic [63:0]   vrf_wdata;

  sparq_vrf #(.NR_VREGS(NR_VREGS), .VLEN(VLEN), .NR_LANES(NR_LANES)) i_vrf (
    .clk_i   (clk_i),
    .re_i    (vrf_re),
    .raddr_i (vrf_raddr),
    .rdata_o (vrf_rdata),
    .we_i    (vrf_we),
    .wbe_i   (vrf_wbe),
    .waddr_i (vrf_waddr),
    .wdata_i (vrf_wdata)
  );

  function automatic logic [AW-1:0] word_addr(input logic [4:0] vreg, input logic [CW-1:0] w);
    word_addr = AW'(vreg) * AW'(WORDS_PER_VREG) + AW'(w);
  endfunction

  // -------------------------------------------------------------------
  // Operand fetch with credit-based flow control
  // -------------------------------------------------------------------
  logic issue_rd, pop;
  logic oq_empty [3];
  logic [63:0]   oq_data [3];
  logic [63:0]   oq_in [3];

  assign ext_gnt_o = (state_q == S_IDLE);
  assign issue_rd  = (state_q == S_RUN) && (rd_cnt_q < nwords_q) &&
                     (inflight_q < QW'(OQ_DEPTH));

  always_comb begin
    vrf_re       = '0;
    vrf_raddr[0] = word_addr(vop_q.vs1, rd_cnt_q);
    vrf_raddr[1] = word_addr(vop_q.vs2, rd_cnt_q);
    vrf_raddr[2] = word_addr(vop_q.vd,  rd_cnt_q);
    if (issue_rd) begin
      vrf_re = 3'b111;
    end else if (ext_req_i && ext_gnt_o && !ext_we_i) begin
      vrf_re[0]    = 1'b1;
      vrf_raddr[0] = ext_addr_i;
    end
  end

  assign a_rep    = replicate(vop_q.scalar, sew_q);
  assign oq_in[0] = (vop_q.a_src == SRC_VREG) ? vrf_rdata[0] : a_rep;
  assign oq_in[1] = vrf_rdata[1];
  assign oq_in[2] = vrf_rdata[2];

  for (genvar q = 0; q < 3; q++) begin : gen_oq
    sparq_operand_queue #(.WIDTH(64), .DEPTH(OQ_DEPTH)) i_oq (
      .clk_i   (clk_i),
      .rst_ni  (rst_ni),
      .push_i  (rvalid_q),
      .data_i  (oq_in[q]),
      .pop_i   (pop),
      .data_o  (oq_data[q]),
      .empty_o (oq_empty[q]),
      .full_o  (),
      .count_o ()
    );
  end

  // -------------------------------------------------------------------
  // Functional units
  // -------------------------------------------------------------------
  logic        fu_valid, valu_in_ready, mfpu_in_ready, fu_ready;
  logic        valu_out_valid, mfpu_out_valid;
  logic [63:0] valu_result, mfpu_result;

  assign fu_valid = (state_q == S_RUN) && !oq_empty[0] && !oq_empty[1] && !oq_empty[2];
  assign fu_ready = (vop_q.fu == FU_VALU) ? valu_in_ready : mfpu_in_ready;
  assign pop      = fu_valid && fu_ready;

  sparq_valu i_valu (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .in_valid_i  (fu_valid && (vop_q.fu == FU_VALU)),
    .in_ready_o  (valu_in_ready),
    .op_i        (vop_q.op),
    .sew_i       (sew_q),
    .a_i         (oq_data[0]),
    .b_i         (oq_data[1]),
    .out_valid_o (valu_out_valid),
    .out_ready_i (1'b1),
    .result_o    (valu_result)
  );

  sparq_vmfpu #(.MUL_STAGES(MUL_STAGES)) i_vmfpu (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .in_valid_i  (fu_valid && (vop_q.fu != FU_VALU)),
    .in_ready_o  (mfpu_in_ready),
    .fu_i        (vop_q.fu),
    .op_i        (vop_q.op),
    .sew_i       (sew_q),
    .a_i         (oq_data[0]),
    .b_i         (oq_data[1]),
    .c_i         (oq_data[2]),
    .out_valid_o (mfpu_out_valid),
    .out_ready_i (1'b1),
    .result_o    (mfpu_result)
  );

  // -------------------------------------------------------------------
  // Write-back
  // -------------------------------------------------------------------
  logic res_valid, last_wr;

  assign res_valid = (state_q == S_RUN) && (valu_out_valid || mfpu_out_valid);
  assign last_wr   = res_valid && (wr_cnt_q == nwords_q - CW'(1));

  always_comb begin
    vrf_we    = 1'b0;
    vrf_wbe   = '1;
    vrf_waddr = word_addr(vop_q.vd, wr_cnt_q);
    vrf_wdata = valu_out_valid ? valu_result : mfpu_result;
    if (res_valid) begin
      vrf_we = 1'b1;
      if (last_wr && tail_q != 3'd0) vrf_wbe = 8'((9'd1 << tail_q) - 9'd1);
    end else if (ext_req_i && ext_gnt_o && ext_we_i) begin
      vrf_we    = 1'b1;
      vrf_wbe   = ext_be_i;
      vrf_waddr = ext_addr_i;
      vrf_wdata = ext_wdata_i;
    end
  end

  assign ext_rdata_o = vrf_rdata[0];
  assign done_o      = last_wr;

  assign events_o.fetch_stall = (state_q == S_RUN) && (rd_cnt_q < nwords_q) && !issue_rd;
  assign events_o.tail_write  = vrf_we && res_valid && (vrf_wbe != 8'hFF);
  assign events_o.vmacsr_word = res_valid && (vop_q.op == OP_VMACSR);

  // -------------------------------------------------------------------
  // Sequencer state
  // -------------------------------------------------------------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= S_IDLE;
      vop_q        <= '0;
      sew_q        <= EW8;
      nwords_q     <= '0;
      tail_q       <= '0;
      rd_cnt_q     <= '0;
      wr_cnt_q     <= '0;
      inflight_q   <= '0;
      rvalid_q     <= 1'b0;
      ext_rvalid_o <= 1'b0;
    end else begin
      rvalid_q     <= issue_rd;
      ext_rvalid_o <= ext_req_i && ext_gnt_o && !ext_we_i;
      inflight_q   <= inflight_q + (issue_rd ? QW'(1) : QW'(0)) - (pop ? QW'(1) : QW'(0));
      if (issue_rd) rd_cnt_q <= rd_cnt_q + CW'(1);
      if (res_valid) wr_cnt_q <= wr_cnt_q + CW'(1);
      unique case (state_q)
        S_IDLE: if (accept && !dec_illegal && nbytes != '0) begin
          state_q  <= S_RUN;
          vop_q    <= dec_vop;
          sew_q    <= vsew_i;
          nwords_q <= CW'((nbytes + 12'd7) >> 3);
          tail_q   <= nbytes[2:0];
          rd_cnt_q <= '0;
          wr_cnt_q <= '0;
        end
        S_RUN: if (last_wr) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // -------------------------------------------------------------------
  // Checks
  // -------------------------------------------------------------------
  assert property (@(posedge clk_i) disable iff (!rst_ni) inflight_q <= QW'(OQ_DEPTH))
    else $error("lane: more operands in flight than queue slots");
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   instr_valid_i && !instr_ready_o |=> instr_valid_i && $stable(instr_i))
    else $error("lane: instruction withdrawn before it was accepted");
  assert property (@(posedge clk_i) disable iff (!rst_ni) res_valid |-> wr_cnt_q < nwords_q)
    else $error("lane: more results than words");

endmodule
