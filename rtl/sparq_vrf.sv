// sparq_vrf: the slice of the vector register file held by one Sparq lane.
//
// The machine has 32 vector registers of VLEN = 4096 bits, 16 KiB in all,
// spread over NR_LANES = 4 lanes, so each lane holds VLEN/NR_LANES = 1024 bits
// (16 words of 64 bits) of every register: 512 words, 4 KiB. Word w of
// register v sits at address v*WORDS_PER_VREG + w.
// The paper gives only the total size. Ara builds the VRF from eight
// single-ported banks with an arbiter; this version is a plain memory array
// with three read ports (operands a, b and c of one instruction) and one
// write port with byte enables, so that a lane word can be fetched in full
// every cycle. On silicon it would map to SRAM macros.
// Timing: reads are synchronous (data one cycle after the address, like an
// SRAM); writes take effect at the clock edge. A read and a write of the same
// word in the same cycle return the old value.
module sparq_vrf #(
  parameter int unsigned NR_VREGS = 32,
  parameter int unsigned VLEN     = 4096,
  parameter int unsigned NR_LANES = 4,
  localparam int unsigned WORDS_PER_VREG = VLEN / NR_LANES / 64,
  localparam int unsigned NR_WORDS       = NR_VREGS * WORDS_PER_VREG,
  localparam int unsigned AW             = $clog2(NR_WORDS)
) (
  input  logic          clk_i,
  input  logic [2:0]    re_i,
  input  logic [AW-1:0] raddr_i [3],
  output logic [63:0]   rdata_o [3],
  input  logic          we_i,
  input  logic [7:0]    wbe_i,
  input  logic [AW-1:0] waddr_i,
  input  logic [63:0]   wdata_i
);

  logic [63:0] mem [NR_WORDS];

  always_ff @(posedge clk_i) begin
    for (int p = 0; p < 3; p++)
      if (re_i[p]) rdata_o[p] <= mem[raddr_i[p]];
    if (we_i)
      for (int b = 0; b < 8; b++)
        if (wbe_i[b]) mem[waddr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
  end

endmodule
