// tb_ns_lbp_mat: a mat of two sub-arrays. Writes through op_sel reach only the
// selected sub-array, the read mux returns the selected one, and both local LBP
// controllers run at the same time on different pixels; their LBP_array rows
// are read back and compared with a direct LBP computation (pixel > pivot).
module tb_ns_lbp_mat;
  import nslbp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  subarray_op_t op;
  logic [1:0] op_sel, lbp_start, lbp_busy, lbp_done;
  logic [0:0] rd_sel;
  logic [COLS-1:0] rdata;
  ns_lbp_mat dut (.clk(clk), .rst_n(rst_n), .op(op), .op_sel(op_sel), .lbp_start(lbp_start),
                  .p_base(P_BASE), .c_base(C_BASE), .cmp_en('1), .size(SZ_256), .rd_sel(rd_sel),
                  .rdata(rdata), .lbp_busy(lbp_busy), .lbp_done(lbp_done));

  task automatic wr(logic [1:0] sel, row_t r, logic [COLS-1:0] d);
    op = '0; op.valid = 1; op.wen = 1; op.wa = r; op.wsrc = WSRC_DATA; op.wdata = d; op.size = SZ_256;
    op_sel = sel;
    @(posedge clk); #1; op = '0; op_sel = '0;
  endtask
  task automatic rd(int s, row_t r, output logic [COLS-1:0] d);
    op = '0; op.valid = 1; op.ren = 3'b001; op.ra = r; op.sel = SA_AND3; op_sel = 2'(1 << s);
    rd_sel = 1'(s);
    @(posedge clk); #1; d = rdata; op = '0; op_sel = '0;
  endtask

  initial begin
    logic [7:0] pix [2][COLS];
    logic [7:0] piv [2];
    logic [COLS-1:0] plane, got, e;
    op = '0; op_sel = 0; lbp_start = 0; rd_sel = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    wr(2'b11, ROW_ZERO, '0);
    wr(2'b01, 8'd200, {8{32'hAAAA5555}});
    wr(2'b10, 8'd200, {8{32'h12345678}});
    rd(0, 8'd200, got); checks++; if (got !== {8{32'hAAAA5555}}) failures++;
    rd(1, 8'd200, got); checks++; if (got !== {8{32'h12345678}}) failures++;
    for (int s = 0; s < 2; s++) begin
      piv[s] = 8'($urandom);
      for (int c = 0; c < COLS; c++) pix[s][c] = ($urandom_range(0, 3) == 0) ? piv[s] : 8'($urandom);
      for (int i = 0; i < 8; i++) begin
        for (int c = 0; c < COLS; c++) plane[c] = pix[s][c][i];
        wr(2'(1 << s), P_BASE + row_t'(i), plane);
        wr(2'(1 << s), C_BASE + row_t'(i), piv[s][i] ? '1 : '0);
      end
    end
    lbp_start = 2'b11; @(posedge clk); #1; lbp_start = 0;
    checks++;
    if (lbp_busy !== 2'b11) begin failures++; $display("both controllers should be busy"); end
    while (|lbp_busy) begin @(posedge clk); #1; end
    for (int s = 0; s < 2; s++) begin
      for (int c = 0; c < COLS; c++) e[c] = pix[s][c] > piv[s];
      rd(s, ROW_LBP, got);
      checks++;
      if (got !== e) begin failures++; $display("sub %0d LBP row mismatch", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
