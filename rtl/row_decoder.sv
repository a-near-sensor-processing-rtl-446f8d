// row_decoder: modified row decoder of a compute sub-array.
//
// A standard SRAM decoder raises one word line. For in-memory logic this decoder
// can raise up to three read word lines (RWL) in the same cycle, one per enabled
// address port (ra, rb, rc); ports that name the same row raise that row once.
// A separate write word line (WWL) is raised for the row being written.
// Combinational: three one-hot decoders OR-ed together plus one write decoder.
module row_decoder #(
  parameter int NROW = 256,
  parameter int AW   = $clog2(NROW)
) (
  input  logic [AW-1:0]   ra,
  input  logic [AW-1:0]   rb,
  input  logic [AW-1:0]   rc,
  input  logic [2:0]      ren,
  input  logic [AW-1:0]   wa,
  input  logic            wen,
  output logic [NROW-1:0] rwl,
  output logic [NROW-1:0] wwl
);
  always_comb begin
    rwl = '0;
    wwl = '0;
    if (ren[0]) rwl[ra] = 1'b1;
    if (ren[1]) rwl[rb] = 1'b1;
    if (ren[2]) rwl[rc] = 1'b1;
    if (wen)    wwl[wa] = 1'b1;
  end
endmodule
