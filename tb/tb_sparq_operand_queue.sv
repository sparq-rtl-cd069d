// tb_sparq_operand_queue: self-checking testbench of the operand queue.
//
// Random pushes and pops (never pushing when full nor popping when empty, as
// the lane guarantees) against a queue model: checks the head word, the
// count, full and empty flags, and the no-fall-through timing.
module tb_sparq_operand_queue;
  localparam int unsigned DEPTH = 4;  // default of sparq_operand_queue

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        push, pop, empty, full;
  logic [63:0] din, dout;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;

  sparq_operand_queue dut (
    .clk_i(clk), .rst_ni(rst_n), .push_i(push), .data_i(din), .pop_i(pop),
    .data_o(dout), .empty_o(empty), .full_o(full), .count_o(count));

  task automatic check(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [63:0] model [$];
  int n_full = 0;

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(64'(empty), 1, "empty after reset");
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      check(64'(count), 64'(model.size()), "count");
      check(64'(empty), 64'(model.size() == 0), "empty");
      check(64'(full), 64'(model.size() == DEPTH), "full");
      if (model.size() > 0) check(dout, model[0], "head");
      if (full) n_full++;
      // Bias toward filling in the first half, draining in the second.
      push = !full && ($urandom_range(0, 99) < ((n / 500) % 2 ? 30 : 70));
      pop  = !empty && ($urandom_range(0, 99) < ((n / 500) % 2 ? 70 : 30));
      din  = {$urandom, $urandom};
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    @(negedge clk); push = 0; pop = 0;
    check(64'(n_full > 0), 1, "queue was filled at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
