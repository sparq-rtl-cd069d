// tb_sparq_vmfpu: self-checking testbench of the FPU-less multiply/divide unit.
//
// Sends bursts of multiplier words (vmul/vmacc/vnmsac/vmacsr) and single
// divider words (vdivu/vdiv/vremu/vrem), all element widths, and checks every
// result against sparq_ref_pkg, in order. Checks that a multiplier burst
// streams at one word per cycle and that the unit answers to the selected
// functional unit only.
module tb_sparq_vmfpu;
  import sparq_pkg::*;
  import sparq_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  fu_e         fu;
  op_e         op;
  vew_e        sew;
  logic [63:0] a, b, c, result;
  int checks = 0, failures = 0;
  int n_mul = 0, n_div = 0;

  sparq_vmfpu dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .fu_i(fu), .op_i(op), .sew_i(sew), .a_i(a), .b_i(b), .c_i(c),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .result_o(result));

  task automatic check(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [63:0] exp_q [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_q.size() == 0) begin checks++; failures++; $display("FAIL spurious"); end
    else check(result, exp_q.pop_front(), "result");
  end

  op_e mops [4] = '{OP_VMUL, OP_VMACC, OP_VNMSAC, OP_VMACSR};
  op_e dops [4] = '{OP_VDIVU, OP_VDIV, OP_VREMU, OP_VREM};

  initial begin
    in_valid = 0; out_ready = 1; fu = FU_MUL; op = OP_VMUL; sew = EW8; a = 0; b = 0; c = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 60; r++) begin
      int t0, len;
      // Multiplier burst.
      len = $urandom_range(1, 20);
      t0 = $time;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        in_valid = 1; fu = FU_MUL; op = mops[$urandom_range(0, 3)];
        sew = vew_e'($urandom_range(0, 3));
        a = rand64(); b = rand64(); c = rand64();
        checks++;
        if (!in_ready) begin failures++; $display("FAIL multiplier not streaming"); end
        exp_q.push_back(ref_word(op, a, b, c, sew));
        n_mul++;
      end
      @(negedge clk); in_valid = 0;
      repeat (4) @(negedge clk);
      check(64'(exp_q.size()), 0, "burst drained");
      // One divider word.
      in_valid = 1; fu = FU_DIV; op = dops[$urandom_range(0, 3)];
      sew = vew_e'($urandom_range(0, 3));
      a = rand64() & {8{8'h1F}}; b = rand64(); c = rand64();
      exp_q.push_back(ref_word(op, a, b, c, sew));
      n_div++;
      @(negedge clk); in_valid = 0;
      while (exp_q.size() != 0) @(negedge clk);
    end
    check(64'(n_mul > 0 && n_div > 0), 1, "both units used");
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
