// tb_sparq_valu: self-checking testbench of the vector ALU.
//
// Streams random words through every VALU operation at every element width,
// one word per cycle, and compares with sparq_ref_pkg. Checks the one-cycle
// latency and that a stalled output holds its word.
module tb_sparq_valu;
  import sparq_pkg::*;
  import sparq_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  op_e         op;
  vew_e        sew;
  logic [63:0] a, b, result;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  sparq_valu dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .op_i(op), .sew_i(sew), .a_i(a), .b_i(b),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .result_o(result));

  task automatic check(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [63:0] exp_q [$];
  int          at_q [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_q.size() == 0) begin checks++; failures++; $display("FAIL spurious"); end
    else begin
      check(result, exp_q.pop_front(), "result");
      check(64'(cyc - at_q.pop_front()), 1, "latency");
    end
  end

  op_e ops [9] = '{OP_VADD, OP_VSUB, OP_VAND, OP_VOR, OP_VXOR, OP_VSLL, OP_VSRL, OP_VSRA, OP_VMV};

  initial begin
    in_valid = 0; out_ready = 1; op = OP_VADD; sew = EW8; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = 1;
      op  = ops[$urandom_range(0, 8)];
      sew = vew_e'($urandom_range(0, 3));
      a = rand64(); b = rand64();
      exp_q.push_back(ref_word(op, a, b, 64'd0, sew));
      at_q.push_back(cyc + 1);
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    check(64'(exp_q.size()), 0, "all results returned");
    // Stall.
    out_ready = 0; in_valid = 1; op = OP_VSUB; sew = EW16;
    a = {4{16'd5}}; b = {4{16'd3}};
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    check(64'(out_valid), 1, "held valid");
    check(result, {4{16'hFFFE}}, "held result");
    check(64'(in_ready), 0, "stalled");
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
