// tb_sparq_simd_mul: self-checking testbench of the SIMD multiplier.
//
// Checks the ULPPACK example (two 1-bit operands packed per 8-bit element,
// the dot product appears in the high nibble and vmacsr accumulates it), then
// random words for vmul/vmacc/vnmsac/vmacsr at all four element widths
// against sparq_ref_pkg, the latency (STAGES cycles), one word per cycle
// throughput, and that a stalled output holds its word.
module tb_sparq_simd_mul;
  import sparq_pkg::*;
  import sparq_ref_pkg::*;

  localparam int unsigned STAGES = 2;  // default of sparq_simd_mul

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  op_e         op;
  vew_e        sew;
  logic [63:0] a, b, c, result;
  int checks = 0, failures = 0;

  sparq_simd_mul dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .op_i(op), .sew_i(sew), .a_i(a), .b_i(b), .c_i(c),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .result_o(result));

  task automatic check(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // Streaming test: queue of expected results, scoreboard on the output.
  logic [63:0] exp_q [$];
  int          issue_cyc [$];
  int          cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_q.size() == 0) begin
      failures++; checks++;
      $display("FAIL unexpected output");
    end else begin
      check(result, exp_q.pop_front(), "stream");
      check(64'(cyc - issue_cyc.pop_front()), 64'(STAGES), "latency");
    end
  end

  op_e ops [4] = '{OP_VMUL, OP_VMACC, OP_VNMSAC, OP_VMACSR};

  initial begin
    in_valid = 0; out_ready = 1; op = OP_VMUL; sew = EW8; a = 0; b = 0; c = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ULPPACK, 1-bit operands, SEW = 8: a = (a0 + 16 a1), w = (w1 + 16 w0).
    for (int k = 0; k < 16; k++) begin
      logic a0, a1, w0, w1;
      logic [7:0] acc;
      {a0, a1, w0, w1} = 4'(k);
      acc = 8'($urandom_range(0, 200));
      @(negedge clk);
      in_valid = 1; op = OP_VMACSR; sew = EW8;
      a = {8{4'(a1), 4'(a0)}};
      b = {8{4'(w0), 4'(w1)}};
      c = {8{acc}};
      exp_q.push_back({8{8'(acc + a0 * w0 + a1 * w1)}});
      issue_cyc.push_back(cyc + 1);
      @(negedge clk);
      in_valid = 0;
      repeat (STAGES + 1) @(negedge clk);
    end

    // Back-to-back random stream, one word per cycle.
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = 1;
      op  = ops[$urandom_range(0, 3)];
      sew = vew_e'($urandom_range(0, 3));
      a = rand64(); b = rand64(); c = rand64();
      if (!in_ready) begin failures++; checks++; $display("FAIL not ready"); end
      exp_q.push_back(ref_word(op, a, b, c, sew));
      issue_cyc.push_back(cyc + 1);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (STAGES + 2) @(negedge clk);
    check(64'(exp_q.size()), 0, "all results returned");

    // Output stall: the result must stay put while out_ready is low.
    out_ready = 0;
    in_valid = 1; op = OP_VMACSR; sew = EW16;
    a = rand64(); b = rand64(); c = rand64();
    begin
      logic [63:0] e;
      e = ref_word(op, a, b, c, sew);
      @(negedge clk); in_valid = 0;
      repeat (STAGES + 3) @(negedge clk);
      check(64'(out_valid), 1, "held valid");
      check(result, e, "held data");
      check(64'(in_ready), 0, "stalled pipe refuses input");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
