// compute_subarray: one 8KB (256 x 256) computational SRAM sub-array.
//
// Storage is an array of read/write-decoupled 8T cells: a row is written through
// its write word line, and read through a read word line that lets the cell
// discharge the column's read bit-line (RBL) when it holds '0'. Raising up to
// three read word lines at once makes the RBL level count the '1's among the
// activated cells; the reconfigurable sense amplifiers (reconfig_sa) turn that
// count into OR3/NOR3, MAJ3/MIN, AND3/NAND3 or XOR3 of three rows in a single
// cycle. Two-input operations use a third row that holds all '0' or all '1'.
//
// Interface: one micro-operation (subarray_op_t) per clock. The rows named by
// ra/rb/rc (enabled by ren) are sensed during the cycle; if wen is set, row wa
// is written at the clock edge with either the sensed result (wsrc = WSRC_SA) or
// op.wdata (WSRC_DATA), only in the first 64/128/256 columns (op.size). The
// sensed row is also registered on array_out, valid one cycle after the op
// (out_valid). A row that is both sensed and written yields its old contents.
// A word line left low does not discharge the RBL, so it counts as a '1'.
// The cells are not reset, like an SRAM.
module compute_subarray
  import nslbp_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  subarray_op_t    op,
  output logic [COLS-1:0] array_out,
  output logic            out_valid
);
  logic [COLS-1:0] mem [ROWS];

  logic [ROWS-1:0] rwl, wwl;
  row_decoder #(.NROW(ROWS)) u_dec (
    .ra(op.ra), .rb(op.rb), .rc(op.rc), .ren(op.valid ? op.ren : 3'b000),
    .wa(op.wa), .wen(op.valid & op.wen), .rwl(rwl), .wwl(wwl)
  );

  // A row raised by more than one port is one word line: count its cells once.
  logic act_a, act_b, act_c;
  always_comb begin
    act_a = rwl[op.ra] & op.ren[0];
    act_b = rwl[op.rb] & op.ren[1] & ~(op.ren[0] & (op.rb == op.ra));
    act_c = rwl[op.rc] & op.ren[2] & ~(op.ren[0] & (op.rc == op.ra))
                                   & ~(op.ren[1] & (op.rc == op.rb));
  end

  logic [COLS-1:0] cell_a, cell_b, cell_c;
  logic [COLS-1:0][1:0] level;
  always_comb begin
    cell_a = act_a ? mem[op.ra] : '1;
    cell_b = act_b ? mem[op.rb] : '1;
    cell_c = act_c ? mem[op.rc] : '1;
    for (int c = 0; c < COLS; c++)
      level[c] = 2'(cell_a[c]) + 2'(cell_b[c]) + 2'(cell_c[c]);
  end

  logic sae;
  logic [COLS-1:0] sa_out;
  always_comb sae = op.valid & (|op.ren);
  reconfig_sa u_sa (.level(level), .sae(sae), .out_s(op.sel), .inv(op.inv), .array_out(sa_out));

  logic [COLS-1:0] wmask, wdat;
  always_comb begin
    wmask = size_mask(op.size);
    wdat  = (op.wsrc == WSRC_DATA) ? op.wdata : sa_out;
  end

  // Write port: row wa, per-column write enables from the size mask.
  always_ff @(posedge clk) begin
    if (op.valid && op.wen)
      for (int c = 0; c < COLS; c++)
        if (wmask[c]) mem[op.wa][c] <= wdat[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      array_out <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= sae;
      if (sae) array_out <= sa_out;
    end
  end

  // At most three read word lines may be raised at once, and the write word
  // line raised is the one of the addressed row.
  a_three_rwl: assert property (@(posedge clk) disable iff (!rst_n) $countones(rwl) <= 3);
  a_one_wwl:   assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0(wwl) && (wwl[op.wa] == (op.valid & op.wen)));
endmodule
