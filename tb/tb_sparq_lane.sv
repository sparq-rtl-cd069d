// tb_sparq_lane: end-to-end, self-checking testbench of one Sparq lane.
//
// Runs the lane with its default parameters (VLEN = 4096, 4 lanes, so 1024
// bits of each vector register in this lane). The testbench plays the parts
// that are outside the lane: the scalar core (it offers instructions, packs
// weights into scalars) and the load/store and slide units (it moves data in
// and out of the VRF through the ext_* port, and performs vslidedown by
// reading a register, shifting it by one element and writing it back).
//
// Part 1 - random instructions: every supported operation, in .vv/.vx/.vi
//   form, with random registers, element widths and vector lengths
//   (including partial last words), checked register-wide against a model of
//   the VRF built on sparq_ref_pkg. Full-length VALU and multiplier
//   instructions are also timed: the last word must be written
//   n + 3 (VALU) or n + 2 + MUL_STAGES (multiplier) cycles after acceptance.
// Part 2 - 2D convolutions as the paper runs them on the lane: output-
//   stationary, one input row at a time, kernel columns as scalars,
//   vslidedown between columns, partial output rows moved down with
//   vmv.v.v. LP: two channels packed per 16-bit element, vmacsr.vx (shift 8),
//   at W2A2/3x3 and W3A4/7x7. ULP: two channels per 8-bit element, vmacsr.vx
//   (shift 4), at W1A1/7x7 and W1A2/3x3. int16: one channel per element with
//   vmacc.vx, 7x7. Packing is done on the lane with vsll.vi and vor.vv. Every
//   output row is compared with a direct convolution.
// Part 3 - refused instructions (floating point, masked) and the ext port
//   being refused while the lane is busy.
// Each mechanism (vmacsr, operand fetch stalled by full queues, partial tail
// word, divider, scalar/immediate operand, illegal instruction, ext port
// refused) is counted, and one that never happened counts as a failure.
module tb_sparq_lane;
  import sparq_pkg::*;
  import sparq_ref_pkg::*;

  localparam int unsigned WPR        = 16;  // 64-bit words per vreg in a lane
  localparam int unsigned MUL_STAGES = 2;   // default of sparq_lane

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        instr_valid, instr_ready, done, illegal, busy;
  lane_events_t ev;
  logic [31:0] instr;
  logic [63:0] rs1;
  vew_e        vsew;
  logic [7:0]  vl;
  logic        ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [7:0]  ext_be;
  logic [8:0]  ext_addr;
  logic [63:0] ext_wdata, ext_rdata;

  sparq_lane dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_valid_i(instr_valid), .instr_ready_o(instr_ready), .instr_i(instr),
    .rs1_value_i(rs1), .vsew_i(vsew), .vl_i(vl),
    .done_o(done), .illegal_o(illegal), .busy_o(busy), .events_o(ev),
    .ext_req_i(ext_req), .ext_we_i(ext_we), .ext_be_i(ext_be), .ext_addr_i(ext_addr),
    .ext_wdata_i(ext_wdata), .ext_gnt_o(ext_gnt), .ext_rvalid_o(ext_rvalid),
    .ext_rdata_o(ext_rdata));

  int checks = 0, failures = 0;
  task automatic check(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // ---------------------------------------------------------------------
  // Mechanism counters
  // ---------------------------------------------------------------------
  int n_vmacsr = 0, n_oq_stall = 0, n_tail = 0, n_div = 0, n_scalar = 0;
  int n_illegal = 0, n_ext_refused = 0, n_vmacsr_words = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev.fetch_stall) n_oq_stall++;
    if (ev.tail_write) n_tail++;
    if (ev.vmacsr_word) n_vmacsr_words++;
    if (illegal) n_illegal++;
    if (ext_req && !ext_gnt) n_ext_refused++;
  end

  // ---------------------------------------------------------------------
  // VRF model and ext-port helpers (load/store and slide unit stand-ins)
  // ---------------------------------------------------------------------
  logic [63:0] m [32][WPR];

  task automatic ext_write(input int vreg, input int w, input logic [63:0] d);
    @(negedge clk);
    ext_req = 1; ext_we = 1; ext_be = '1; ext_addr = 9'(vreg * WPR + w); ext_wdata = d;
    @(negedge clk);
    ext_req = 0; ext_we = 0;
    m[vreg][w] = d;
  endtask

  task automatic ext_read(input int vreg, input int w, output logic [63:0] d);
    @(negedge clk);
    ext_req = 1; ext_we = 0; ext_addr = 9'(vreg * WPR + w);
    @(negedge clk);
    ext_req = 0;
    if (!ext_rvalid) begin checks++; failures++; $display("FAIL ext read not answered"); end
    d = ext_rdata;
  endtask

  task automatic check_vreg(input int vreg, input string what);
    logic [63:0] d;
    for (int w = 0; w < WPR; w++) begin
      ext_read(vreg, w, d);
      check(d, m[vreg][w], $sformatf("%s v%0d word %0d", what, vreg, w));
    end
  endtask

  // vslidedown.vi vreg, vreg, 1 over n_el elements of EB bits (zero fill).
  task automatic slide_down(input int vreg, input int n_el, input int eb);
    logic [63:0] e [WPR*8];
    logic [63:0] d, msk;
    int per;
    per = 64 / eb;
    msk = emask(eb);
    for (int w = 0; w < WPR; w++) begin
      ext_read(vreg, w, d);
      for (int k = 0; k < per; k++) e[w*per+k] = (d >> (k * eb)) & msk;
    end
    for (int i = 0; i < n_el; i++) e[i] = (i + 1 < n_el) ? e[i+1] : 64'd0;
    for (int w = 0; w < WPR; w++) begin
      d = '0;
      for (int k = 0; k < per; k++) d |= e[w*per+k] << (k * eb);
      ext_write(vreg, w, d);
    end
  endtask

  // ---------------------------------------------------------------------
  // Instruction helpers
  // ---------------------------------------------------------------------
  typedef struct { logic [5:0] f6; logic mform; op_e op; logic vi; } entry_t;
  entry_t tab [17] = '{
    '{6'b000000, 0, OP_VADD,   1}, '{6'b000010, 0, OP_VSUB,   0},
    '{6'b001001, 0, OP_VAND,   1}, '{6'b001010, 0, OP_VOR,    1},
    '{6'b001011, 0, OP_VXOR,   1}, '{6'b100101, 0, OP_VSLL,   1},
    '{6'b101000, 0, OP_VSRL,   1}, '{6'b101001, 0, OP_VSRA,   1},
    '{6'b010111, 0, OP_VMV,    1},
    '{6'b100101, 1, OP_VMUL,   0}, '{6'b101101, 1, OP_VMACC,  0},
    '{6'b101111, 1, OP_VNMSAC, 0}, '{6'b101110, 1, OP_VMACSR, 0},
    '{6'b100000, 1, OP_VDIVU,  0}, '{6'b100001, 1, OP_VDIV,   0},
    '{6'b100010, 1, OP_VREMU,  0}, '{6'b100011, 1, OP_VREM,   0}
  };
  localparam int T_VADD = 0, T_VSUB = 1, T_VOR = 3, T_VSLL = 5, T_VMV = 8, T_VMACC = 10, T_VMACSR = 12;

  // form: 0 = .vv, 1 = .vx, 2 = .vi
  // Returns the number of cycles from acceptance to the write of the last word.
  task automatic run(input int t, input int form, input int vd, input int vs1, input int vs2,
                     input logic [63:0] scalar, input vew_e sew, input int n_el,
                     output int cycles);
    entry_t e;
    logic [2:0]  f3;
    logic [4:0]  f_vs1;
    logic [63:0] sc, a, expw, mask;
    logic [63:0] newv [WPR];
    int nbytes, nwords;
    e = tab[t];
    f3 = e.mform ? (form == 0 ? 3'b010 : 3'b110)
                 : (form == 0 ? 3'b000 : form == 1 ? 3'b100 : 3'b011);
    f_vs1 = (form == 0) ? 5'(vs1) : (form == 2) ? scalar[4:0] : 5'd1;
    if (form == 2)
      sc = (e.op inside {OP_VSLL, OP_VSRL, OP_VSRA}) ? {59'd0, scalar[4:0]}
                                                    : {{59{scalar[4]}}, scalar[4:0]};
    else sc = scalar;
    // Expected result, from the model before execution.
    nbytes = n_el << sew;
    nwords = (nbytes + 7) / 8;
    for (int w = 0; w < WPR; w++) begin
      newv[w] = m[vd][w];
      if (w < nwords) begin
        a = (form == 0) ? m[vs1][w] : replicate(sc, sew);
        expw = ref_word(e.op, a, m[(e.op == OP_VMV) ? 0 : vs2][w], m[vd][w], sew);
        mask = (nbytes - w * 8 >= 8) ? '1 : ((64'd1 << (8 * (nbytes - w * 8))) - 1);
        newv[w] = (expw & mask) | (m[vd][w] & ~mask);
      end
    end
    if (e.op == OP_VMACSR) n_vmacsr++;
    if (e.op inside {OP_VDIVU, OP_VDIV, OP_VREMU, OP_VREM}) n_div++;
    if (form != 0) n_scalar++;
    // Issue.
    @(negedge clk);
    instr = {e.f6, 1'b1, (e.op == OP_VMV) ? 5'd0 : 5'(vs2), f_vs1, f3, 5'(vd), 7'b1010111};
    rs1 = scalar; vsew = sew; vl = 8'(n_el);
    instr_valid = 1;
    while (!instr_ready) @(negedge clk);
    @(negedge clk);
    instr_valid = 0;
    cycles = 1;
    if (nwords > 0) begin
      while (!done) begin
        @(negedge clk);
        cycles++;
        if (cycles > 20000) begin checks++; failures++; $display("FAIL no done"); break; end
      end
    end
    for (int w = 0; w < WPR; w++) m[vd][w] = newv[w];
  endtask

  // ---------------------------------------------------------------------
  // 2D convolution, output-stationary (one input row at a time)
  // ---------------------------------------------------------------------
  // Input: C channels x H rows x NW columns, kernel F x F, weight bits WB,
  // activation bits AB. Modes:
  //   M_LP   : two channels packed per 16-bit element, vmacsr.vx (shift 8)
  //   M_ULP  : two channels packed per 8-bit element,  vmacsr.vx (shift 4)
  //   M_INT16: one channel per 16-bit element, vmacc.vx (the int16 baseline)
  // Registers: v1..vF accumulators, v0 the (packed) input row,
  // v20/v21 raw channel rows, v22 packing temporary.
  typedef enum int {M_LP, M_ULP, M_INT16} conv_mode_e;
  int n_conv_rows [3] = '{0, 0, 0};

  task automatic conv2d(input conv_mode_e mode, input int C, input int H, input int NW,
                        input int F, input int WB, input int AB);
    int act [][][];   // [c][y][x]
    int wgt [][][];   // [c][ky][kx]
    int cyc, eb, per, cstep, half;
    vew_e sew;
    logic [63:0] d;
    eb    = (mode == M_ULP) ? 8 : 16;
    sew   = (mode == M_ULP) ? EW8 : EW16;
    per   = 64 / eb;
    half  = eb / 2;
    cstep = (mode == M_INT16) ? 1 : 2;
    act = new[C];
    wgt = new[C];
    for (int c = 0; c < C; c++) begin
      act[c] = new[H];
      wgt[c] = new[F];
      for (int y = 0; y < H; y++) begin
        act[c][y] = new[NW];
        for (int x = 0; x < NW; x++) act[c][y][x] = $urandom_range(0, (1 << AB) - 1);
      end
      for (int ky = 0; ky < F; ky++) begin
        wgt[c][ky] = new[F];
        for (int kx = 0; kx < F; kx++) wgt[c][ky][kx] = $urandom_range(0, (1 << WB) - 1);
      end
    end
    // Clear the accumulators v1..vF.
    for (int j = 1; j <= F; j++) run(T_VMV, 2, j, 0, 0, 64'd0, sew, NW, cyc);
    for (int h = 0; h < H; h++) begin
      run(T_VMV, 2, F, 0, 0, 64'd0, sew, NW, cyc);          // V_F <- 0
      for (int cp = 0; cp < C / cstep; cp++) begin
        // Load the raw channel rows (load unit stand-in).
        for (int w = 0; w < WPR; w++) begin
          logic [63:0] r0, r1;
          r0 = '0; r1 = '0;
          for (int k = 0; k < per; k++) begin
            int x;
            x = w * per + k;
            if (x < NW) begin
              r0 |= 64'(act[cstep*cp][h][x]) << (k * eb);
              if (cstep == 2) r1 |= 64'(act[cstep*cp+1][h][x]) << (k * eb);
            end
          end
          ext_write((cstep == 2) ? 20 : 0, w, r0);
          if (cstep == 2) ext_write(21, w, r1);
        end
        // Pack on the lane: v0 = a_c0 + 2^(SEW/2) a_c1.
        if (cstep == 2) begin
          run(T_VSLL, 2, 22, 0, 21, 64'(half), sew, NW, cyc);
          run(T_VOR,  0, 0, 20, 22, 64'd0, sew, NW, cyc);
        end
        for (int i = 0; i < F; i++) begin
          for (int j = 1; j <= F; j++) begin
            // V_j holds output row h-F+j, which meets this input row through
            // kernel row F-j. Packed weight scalar: w_c1 + 2^(SEW/2) w_c0.
            logic [63:0] r;
            int ky;
            ky = F - j;
            if (cstep == 2) begin
              r = 64'(wgt[2*cp+1][ky][i] + (wgt[2*cp][ky][i] << half));
              run(T_VMACSR, 1, j, 0, 0, r, sew, NW, cyc);
            end else begin
              r = 64'(wgt[cp][ky][i]);
              run(T_VMACC, 1, j, 0, 0, r, sew, NW, cyc);
            end
          end
          slide_down(0, NW, eb);
        end
      end
      if (h >= F - 1) begin
        // Store output row h-F+1 from V_1 and compare with a direct convolution.
        int o;
        o = h - F + 1;
        n_conv_rows[mode]++;
        for (int w = 0; w < WPR; w++) begin
          ext_read(1, w, d);
          check(d, m[1][w], "conv model");
          for (int k = 0; k < per; k++) begin
            int x;
            longint s;
            x = w * per + k;
            if (x <= NW - F) begin
              s = 0;
              for (int c = 0; c < C; c++)
                for (int ky = 0; ky < F; ky++)
                  for (int kx = 0; kx < F; kx++)
                    s += wgt[c][ky][kx] * act[c][o+ky][x+kx];
              check((d >> (k * eb)) & emask(eb), s & emask(eb),
                    $sformatf("conv mode %0d out row %0d col %0d", mode, o, x));
            end
          end
        end
      end
      // Move the partial rows down. Done after every input row (also before
      // the first output row is complete) so that V_j always holds output
      // row h-F+j.
      for (int j = 1; j < F; j++) run(T_VMV, 0, j, j + 1, 0, 64'd0, sew, NW, cyc);
    end
  endtask

  // ---------------------------------------------------------------------
  // Main sequence
  // ---------------------------------------------------------------------
  initial begin
    int cyc;
    logic [63:0] d;
    instr_valid = 0; instr = 0; rs1 = 0; vsew = EW8; vl = 0;
    ext_req = 0; ext_we = 0; ext_be = '1; ext_addr = 0; ext_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Fill the whole VRF with random data.
    for (int v = 0; v < 32; v++)
      for (int w = 0; w < WPR; w++) ext_write(v, w, rand64());

    // Part 1: random instructions.
    for (int n = 0; n < 250; n++) begin
      int t, form, vd, vs1, vs2, n_el, maxel;
      vew_e sew;
      t = $urandom_range(0, 16);
      form = $urandom_range(0, tab[t].vi ? 2 : 1);
      sew = vew_e'($urandom_range(0, 3));
      maxel = (WPR * 8) >> sew;
      n_el = (n % 3 == 0) ? maxel : $urandom_range(1, maxel);
      if (tab[t].op inside {OP_VDIVU, OP_VDIV, OP_VREMU, OP_VREM})
        n_el = $urandom_range(1, maxel / 2);
      vd = $urandom_range(0, 31); vs1 = $urandom_range(0, 31); vs2 = $urandom_range(0, 31);
      run(t, form, vd, vs1, vs2, rand64(), sew, n_el, cyc);
      if (n_el == maxel && !(tab[t].op inside {OP_VDIVU, OP_VDIV, OP_VREMU, OP_VREM}))
        check(64'(cyc), 64'(int'(WPR) + 2 + (tab[t].mform ? int'(MUL_STAGES) : 1)),
              $sformatf("cycles of %s", tab[t].op.name()));
      check_vreg(vd, $sformatf("random %s", tab[t].op.name()));
      if (n % 10 == 0) check_vreg($urandom_range(0, 31), "untouched");
    end

    // Part 2: packed sub-byte convolutions.
    conv2d(M_LP,    4, 6,  64, 3, 2, 2);  // LP  W2A2, 3x3 kernel, two channel pairs
    conv2d(M_LP,    2, 9,  64, 7, 3, 4);  // LP  W3A4 (N+M = 7), 7x7 kernel
    conv2d(M_ULP,   2, 8, 128, 7, 1, 1);  // ULP W1A1, 7x7 kernel, 8-bit packing
    conv2d(M_ULP,   2, 5, 128, 3, 1, 2);  // ULP W1A2 (N+M = 3), 3x3 kernel
    conv2d(M_INT16, 2, 8,  64, 7, 8, 8);  // int16 baseline with vmacc, 7x7 kernel

    // Part 3: refused instructions and ext port refusal.
    @(negedge clk);
    instr = {6'b000000, 1'b1, 5'd1, 5'd2, 3'b001, 5'd3, 7'b1010111}; // vfadd.vv
    instr_valid = 1;
    #1 check(64'(illegal), 1, "OPFVV refused");
    @(negedge clk);
    check(64'(busy), 0, "not busy after refusal");
    instr = {6'b101110, 1'b0, 5'd1, 5'd2, 3'b110, 5'd3, 7'b1010111}; // masked vmacsr
    #1 check(64'(illegal), 1, "masked refused");
    @(negedge clk);
    instr_valid = 0;
    // Start a long divide and try the ext port meanwhile.
    @(negedge clk);
    instr = {6'b100000, 1'b1, 5'd2, 5'd3, 3'b010, 5'd4, 7'b1010111}; // vdivu.vv v4, v2, v3
    vsew = EW64; vl = 8'd4; instr_valid = 1;
    for (int w = 0; w < 4; w++)
      m[4][w] = ref_word(OP_VDIVU, m[3][w], m[2][w], 64'd0, EW64);
    @(negedge clk);
    instr_valid = 0;
    ext_req = 1; ext_we = 1; ext_addr = 9'(4 * WPR); ext_wdata = '0;
    repeat (5) @(negedge clk);
    check(64'(ext_gnt), 0, "ext refused while busy");
    ext_req = 0; ext_we = 0;
    while (busy) @(negedge clk);
    n_div++;
    check_vreg(4, "vdivu after refused ext write");

    // Mechanism coverage.
    $display("mechanisms: vmacsr_words=%0d", n_vmacsr_words);
    $display("mechanisms: vmacsr=%0d oq_stall=%0d tail=%0d div=%0d scalar=%0d illegal=%0d ext_refused=%0d",
             n_vmacsr, n_oq_stall, n_tail, n_div, n_scalar, n_illegal, n_ext_refused);
    check(64'(n_vmacsr > 0), 1, "vmacsr happened");
    $display("conv output rows checked: LP=%0d ULP=%0d INT16=%0d", n_conv_rows[0], n_conv_rows[1], n_conv_rows[2]);
    for (int k = 0; k < 3; k++) check(64'(n_conv_rows[k] > 0), 1, "conv mode ran");
    check(64'(n_vmacsr_words > 0), 1, "vmacsr words reported");
    check(64'(n_oq_stall > 0), 1, "operand fetch stall happened");
    check(64'(n_tail > 0), 1, "partial tail word happened");
    check(64'(n_div > 0), 1, "divide happened");
    check(64'(n_scalar > 0), 1, "scalar operand happened");
    check(64'(n_illegal > 0), 1, "illegal instruction happened");
    check(64'(n_ext_refused > 0), 1, "ext refusal happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
