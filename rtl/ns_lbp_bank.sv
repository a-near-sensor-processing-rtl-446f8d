// ns_lbp_bank: one 32KB bank made of two 16KB mats (four 8KB sub-arrays).
//
// The bank decodes a flat sub-array index (mat * SUBS + sub) for the central
// micro-operation select, the LBP start strobes and the read mux. The read
// data of sub-array rd_sel is returned on rdata. Purely routing: timing is that
// of the sub-arrays.
module ns_lbp_bank
  import nslbp_pkg::*;
#(
  parameter int MATS = 2,
  parameter int SUBS = 2,
  parameter int NS   = MATS * SUBS,
  parameter int BW   = (NS > 1) ? $clog2(NS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  subarray_op_t    op,
  input  logic [NS-1:0]   op_sel,
  input  logic [NS-1:0]   lbp_start,
  input  row_t            p_base,
  input  row_t            c_base,
  input  logic [COLS-1:0] cmp_en,
  input  size_e           size,
  input  logic [BW-1:0]   rd_sel,
  output logic [COLS-1:0] rdata,
  output logic [NS-1:0]   lbp_busy,
  output logic [NS-1:0]   lbp_done
);
  localparam int SW = (SUBS > 1) ? $clog2(SUBS) : 1;
  logic [COLS-1:0] mdata [MATS];

  for (genvar m = 0; m < MATS; m++) begin : g_mat
    ns_lbp_mat #(.SUBS(SUBS)) u_mat (
      .clk(clk), .rst_n(rst_n), .op(op), .op_sel(op_sel[m*SUBS +: SUBS]),
      .lbp_start(lbp_start[m*SUBS +: SUBS]), .p_base(p_base), .c_base(c_base),
      .cmp_en(cmp_en), .size(size), .rd_sel(SW'(int'(rd_sel) % SUBS)), .rdata(mdata[m]),
      .lbp_busy(lbp_busy[m*SUBS +: SUBS]), .lbp_done(lbp_done[m*SUBS +: SUBS])
    );
  end

  always_comb rdata = (int'(rd_sel) < NS) ? mdata[int'(rd_sel) / SUBS] : '0;
endmodule
