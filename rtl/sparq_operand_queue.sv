// sparq_operand_queue: operand queue between the vector register file and a
// functional unit of a Sparq lane.
//
// A synchronous first-in first-out buffer. The lane reads operand words from
// the VRF ahead of the unit that consumes them and parks them here, so that a
// slow unit (the divider) back-pressures the VRF reads and a fast one (VALU,
// multiplier) finds an operand every cycle. The paper names the operand
// queues (OQ) as one of the four large parts of the lane; depth and width are
// this design's choices.
// Interface: push_i/data_i write when not full, pop_i removes the head shown
// on data_o when not empty. Pushing and popping in the same cycle is allowed
// (a push while full is dropped, and asserted against). There is no
// fall-through: a word pushed in cycle t is visible on data_o in cycle t+1.
module sparq_operand_queue #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             push_i,
  input  logic [WIDTH-1:0] data_i,
  input  logic             pop_i,
  output logic [WIDTH-1:0] data_o,
  output logic             empty_o,
  output logic             full_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0]            mem_q [DEPTH];
  logic [AW-1:0]               rd_ptr_q, wr_ptr_q;
  logic [$clog2(DEPTH+1)-1:0]  cnt_q;
  logic                        do_push, do_pop;

  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    incr = (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr_q <= '0;
      wr_ptr_q <= '0;
      cnt_q    <= '0;
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else begin
      if (do_push) begin
        mem_q[wr_ptr_q] <= data_i;
        wr_ptr_q        <= incr(wr_ptr_q);
      end
      if (do_pop) rd_ptr_q <= incr(rd_ptr_q);
      cnt_q <= cnt_q + $bits(cnt_q)'(do_push) - $bits(cnt_q)'(do_pop);
    end
  end

  assign data_o  = mem_q[rd_ptr_q];
  assign empty_o = (cnt_q == '0);
  assign full_o  = (cnt_q == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign count_o = cnt_q;

  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> !full_o)
    else $error("operand queue: push while full");
  assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> !empty_o)
    else $error("operand queue: pop while empty");

endmodule
