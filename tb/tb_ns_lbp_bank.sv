// tb_ns_lbp_bank: a bank of two mats (four sub-arrays). Distinct data written
// to each sub-array by its own select, and a broadcast write, are read back
// through the bank read mux; an LBP started on sub-array 3 only is checked
// against a direct computation while the others stay idle.
module tb_ns_lbp_bank;
  import nslbp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  subarray_op_t op;
  logic [3:0] op_sel, lbp_start, lbp_busy, lbp_done;
  logic [1:0] rd_sel;
  logic [COLS-1:0] rdata;
  ns_lbp_bank dut (.clk(clk), .rst_n(rst_n), .op(op), .op_sel(op_sel), .lbp_start(lbp_start),
                   .p_base(P_BASE), .c_base(C_BASE), .cmp_en('1), .size(SZ_256), .rd_sel(rd_sel),
                   .rdata(rdata), .lbp_busy(lbp_busy), .lbp_done(lbp_done));
  task automatic wr(logic [3:0] sel, row_t r, logic [COLS-1:0] d);
    op = '0; op.valid = 1; op.wen = 1; op.wa = r; op.wsrc = WSRC_DATA; op.wdata = d; op.size = SZ_256;
    op_sel = sel;
    @(posedge clk); #1; op = '0; op_sel = '0;
  endtask
  task automatic rd(int s, row_t r, output logic [COLS-1:0] d);
    op = '0; op.valid = 1; op.ren = 3'b001; op.ra = r; op.sel = SA_AND3; op_sel = 4'(1 << s);
    rd_sel = 2'(s);
    @(posedge clk); #1; d = rdata; op = '0; op_sel = '0;
  endtask
  initial begin
    logic [7:0] pix [COLS];
    logic [7:0] piv;
    logic [COLS-1:0] plane, got, e;
    int done_seen;
    op = '0; op_sel = 0; lbp_start = 0; rd_sel = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int s = 0; s < 4; s++) wr(4'(1 << s), 8'd250, {COLS/8{8'(s * 37 + 5)}});
    wr(4'b1111, 8'd251, {8{32'hDEADBEEF}});
    for (int s = 0; s < 4; s++) begin
      rd(s, 8'd250, got); checks++;
      if (got !== {COLS/8{8'(s * 37 + 5)}}) begin failures++; $display("sub %0d private row", s); end
      rd(s, 8'd251, got); checks++;
      if (got !== {8{32'hDEADBEEF}}) begin failures++; $display("sub %0d broadcast row", s); end
    end
    wr(4'b1000, ROW_ZERO, '0);
    piv = 8'd128;
    for (int c = 0; c < COLS; c++) pix[c] = 8'($urandom);
    for (int i = 0; i < 8; i++) begin
      for (int c = 0; c < COLS; c++) plane[c] = pix[c][i];
      wr(4'b1000, P_BASE + row_t'(i), plane);
      wr(4'b1000, C_BASE + row_t'(i), piv[i] ? '1 : '0);
    end
    lbp_start = 4'b1000; @(posedge clk); #1; lbp_start = 0;
    checks++;
    if (lbp_busy !== 4'b1000) begin failures++; $display("busy %b", lbp_busy); end
    done_seen = 0;
    while (|lbp_busy) begin @(posedge clk); #1; if (lbp_done[3]) done_seen++; end
    checks++;
    if (done_seen != 1) begin failures++; $display("done pulses %0d", done_seen); end
    for (int c = 0; c < COLS; c++) e[c] = pix[c] > piv;
    rd(3, ROW_LBP, got);
    checks++;
    if (got !== e) begin failures++; $display("LBP row mismatch"); end
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
