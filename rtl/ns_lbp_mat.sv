// ns_lbp_mat: one 16KB computational mat, two 8KB compute sub-arrays.
//
// Each sub-array has its own local controller (lbp_ctrl) that runs the
// in-memory LBP algorithm. While a local controller is busy it owns its
// sub-array; otherwise the sub-array executes the micro-operation broadcast by
// the central controller when its bit in op_sel is set, and idles when not.
// The mat-level decoder routes the central op and the LBP start strobes by
// sub-array index, and the read mux returns array_out of sub-array rd_sel.
// Shared LBP arguments (p_base, c_base, cmp_en, size) are sampled by every
// local controller that receives a start strobe in the same cycle.
// No registers of its own: timing is that of compute_subarray and lbp_ctrl.
// Lint note: the local controllers' LBP vector outputs and the sub-arrays'
// out_valid flags are not needed at mat level (results are read back from
// the LBP row), so they are left unused. rst_n also disables the sub-array
// assertions, which lint reports as a synchronous use of the async reset.
module ns_lbp_mat
  import nslbp_pkg::*;
#(
  parameter int SUBS = 2,
  parameter int SW   = (SUBS > 1) ? $clog2(SUBS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  subarray_op_t    op,
  input  logic [SUBS-1:0] op_sel,
  input  logic [SUBS-1:0] lbp_start,
  input  row_t            p_base,
  input  row_t            c_base,
  input  logic [COLS-1:0] cmp_en,
  input  size_e           size,
  input  logic [SW-1:0]   rd_sel,
  output logic [COLS-1:0] rdata,
  output logic [SUBS-1:0] lbp_busy,
  output logic [SUBS-1:0] lbp_done
);
  logic [COLS-1:0] aout [SUBS];

  for (genvar s = 0; s < SUBS; s++) begin : g_sub
    subarray_op_t lop, sop;
    logic [COLS-1:0] lbp_vec;
    logic            ovalid;

    lbp_ctrl u_lctrl (
      .clk(clk), .rst_n(rst_n), .start(lbp_start[s]), .p_base(p_base), .c_base(c_base),
      .cmp_en(cmp_en), .size(size), .busy(lbp_busy[s]), .done(lbp_done[s]),
      .lbp_array(lbp_vec), .op(lop), .array_out(aout[s])
    );

    always_comb sop = lbp_busy[s] ? lop : (op_sel[s] ? op : '0);

    compute_subarray u_sub (
      .clk(clk), .rst_n(rst_n), .op(sop), .array_out(aout[s]), .out_valid(ovalid)
    );
  end

  always_comb rdata = (int'(rd_sel) < SUBS) ? aout[rd_sel] : '0;
endmodule
