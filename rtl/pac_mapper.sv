// pac_mapper: approximate channel fusion (projection map) of an Ap-LBP block.
//
// Each LBP channel yields an MBITS-bit response. The output pixel is assembled
// bit by bit: output bit k is bit k of the channel named by mapping-table entry
// map[k]. With partial approximate computing the `apx` least significant output
// bits are neither read nor computed and are written as 0. For the published
// example (table B,A,B,A from bit 3 to bit 0, apx = 1) the output is
// 8*b3 + 4*a2 + 2*b1. Bit k of channel c is taken from ch[c][k].
// Combinational.
module pac_mapper #(
  parameter int NCH   = 2,
  parameter int MBITS = 4,
  parameter int CHW   = (NCH > 1) ? $clog2(NCH) : 1
) (
  input  logic [NCH-1:0][MBITS-1:0]   ch,
  input  logic [MBITS-1:0][CHW-1:0]   map,
  input  logic [$clog2(MBITS+1)-1:0]  apx,
  output logic [MBITS-1:0]            pix
);
  always_comb
    for (int k = 0; k < MBITS; k++)
      pix[k] = (k < int'(apx)) ? 1'b0 : ch[map[k]][k];
endmodule
