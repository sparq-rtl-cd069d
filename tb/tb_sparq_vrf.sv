// tb_sparq_vrf: self-checking testbench of the lane's vector register file.
//
// Uses the default size (32 registers x 1024 bits per lane = 512 words).
// Fills every word, then runs random reads on all three ports and random
// byte-enabled writes against a model, checking the one-cycle read latency
// and read-before-write on a same-address collision.
module tb_sparq_vrf;
  localparam int unsigned NR_WORDS = 512;
  localparam int unsigned AW = 9;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [2:0]    re;
  logic [AW-1:0] raddr [3];
  logic [63:0]   rdata [3];
  logic          we;
  logic [7:0]    wbe;
  logic [AW-1:0] waddr;
  logic [63:0]   wdata;
  int checks = 0, failures = 0;

  sparq_vrf dut (.clk_i(clk), .re_i(re), .raddr_i(raddr), .rdata_o(rdata),
                 .we_i(we), .wbe_i(wbe), .waddr_i(waddr), .wdata_i(wdata));

  task automatic check(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [63:0] model [NR_WORDS];
  logic [63:0] exp [3];
  logic [2:0]  exp_v;

  initial begin
    re = 0; we = 0; wbe = '1; waddr = 0; wdata = 0;
    for (int p = 0; p < 3; p++) raddr[p] = 0;
    @(negedge clk);
    for (int i = 0; i < NR_WORDS; i++) begin
      we = 1; wbe = '1; waddr = AW'(i); wdata = {$urandom, $urandom};
      model[i] = wdata;
      @(negedge clk);
    end
    we = 0;
    exp_v = 0;
    for (int n = 0; n < 4000; n++) begin
      // Drive a new set of requests.
      re = 3'($urandom);
      for (int p = 0; p < 3; p++) raddr[p] = AW'($urandom_range(0, NR_WORDS - 1));
      we = $urandom_range(0, 1);
      wbe = 8'($urandom);
      waddr = (n % 5 == 0) ? raddr[0] : AW'($urandom_range(0, NR_WORDS - 1));
      wdata = {$urandom, $urandom};
      for (int p = 0; p < 3; p++) if (re[p]) exp[p] = model[raddr[p]];
      @(posedge clk);
      if (we) for (int b = 0; b < 8; b++) if (wbe[b]) model[waddr][b*8 +: 8] = wdata[b*8 +: 8];
      @(negedge clk);
      for (int p = 0; p < 3; p++) if (re[p]) check(rdata[p], exp[p], $sformatf("port %0d", p));
    end
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
