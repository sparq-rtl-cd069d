// tb_sparq_simd_div: self-checking testbench of the SIMD divider.
//
// Random words (with forced zero divisors and signed-overflow cases) for
// vdivu/vdiv/vremu/vrem at all element widths, compared with sparq_ref_pkg.
// Also checks the cycle count of one word, (64/SEW)*(SEW+2) cycles from
// acceptance to the result, and that the result is held while out_ready is
// low.
module tb_sparq_simd_div;
  import sparq_pkg::*;
  import sparq_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  op_e         op;
  vew_e        sew;
  logic [63:0] a, b, result;
  int checks = 0, failures = 0;

  sparq_simd_div dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .op_i(op), .sew_i(sew), .a_i(a), .b_i(b),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .result_o(result));

  task automatic check(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (op %s sew %0d a %h b %h)",
               what, got, exp, op.name(), 8 << sew, a, b);
    end
  endtask

  op_e ops [4] = '{OP_VDIVU, OP_VDIV, OP_VREMU, OP_VREM};

  initial begin
    in_valid = 0; out_ready = 1; op = OP_VDIVU; sew = EW8; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      int w, cycles;
      logic [63:0] e;
      @(negedge clk);
      op  = ops[$urandom_range(0, 3)];
      sew = vew_e'($urandom_range(0, 3));
      w   = 8 << sew;
      a   = rand64(); b = rand64();
      // Small divisors give interesting quotients.
      if ($urandom_range(0, 1)) a = a & {8{8'h0F}};
      if (n % 7 == 0) a = a & ~emask(w);                     // divide by zero in element 0
      if (n % 11 == 0) begin                                 // signed overflow in element 0
        a = a | emask(w);
        b = (b & ~emask(w)) | (64'd1 << (w - 1));
      end
      e = ref_word(op, a, b, 64'd0, sew);
      if (!in_ready) begin checks++; failures++; $display("FAIL busy"); end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      cycles = 0;
      while (!out_valid) begin @(negedge clk); cycles++; end
      check(result, e, "result");
      check(64'(cycles), 64'((64 / w) * (w + 2)), "cycles");
    end
    // Hold while not ready.
    @(negedge clk);
    out_ready = 0; op = OP_VDIVU; sew = EW32; a = {32'd7, 32'd3}; b = {32'd100, 32'd10};
    in_valid = 1;
    @(negedge clk); in_valid = 0;
    repeat (100) @(negedge clk);
    check(64'(out_valid), 1, "held valid");
    check(result, {32'd14, 32'd3}, "held result");
    check(64'(in_ready), 0, "busy while holding");
    out_ready = 1;
    @(negedge clk);
    check(64'(in_ready), 1, "idle after handoff");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
