// tb_lbp_ctrl: a compute sub-array driven by its local LBP controller.
// Random pixels (with many values equal to or close to the pivot) and a random
// pivot are written transposed into the P- and C-regions; the controller's LBP
// vector, the LBP_array row in memory and the cycle count are compared with a
// reference that follows the published algorithm step by step. Includes the
// worked example of four pixels whose result is 1001 and skipped columns.
module tb_lbp_ctrl;
  import nslbp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  subarray_op_t tb_op, lop, sop;
  logic [COLS-1:0] aout, lbp, cmp_en;
  logic ovalid, start, busy, done;
  size_e size;

  lbp_ctrl dut (.clk(clk), .rst_n(rst_n), .start(start), .p_base(P_BASE), .c_base(C_BASE),
                .cmp_en(cmp_en), .size(size), .busy(busy), .done(done), .lbp_array(lbp),
                .op(lop), .array_out(aout));
  always_comb sop = busy ? lop : tb_op;
  compute_subarray u_sub (.clk(clk), .rst_n(rst_n), .op(sop), .array_out(aout), .out_valid(ovalid));

  task automatic wr(row_t r, logic [COLS-1:0] d);
    tb_op = '0; tb_op.valid = 1; tb_op.wen = 1; tb_op.wa = r; tb_op.wsrc = WSRC_DATA;
    tb_op.wdata = d; tb_op.size = SZ_256;
    @(posedge clk); #1; tb_op = '0;
  endtask

  task automatic rd(row_t r, output logic [COLS-1:0] d);
    tb_op = '0; tb_op.valid = 1; tb_op.ren = 3'b001; tb_op.ra = r; tb_op.sel = SA_AND3;
    @(posedge clk); #1; d = aout; tb_op = '0;
  endtask

  task automatic run(logic [7:0] pix [COLS], logic [7:0] piv, logic [COLS-1:0] en, size_e sz);
    logic [COLS-1:0] plane, e_lbp, decided, fresh, m, got_row;
    int e_cycles, cycles;
    for (int i = 0; i < 8; i++) begin
      for (int c = 0; c < COLS; c++) plane[c] = pix[c][i];
      wr(P_BASE + row_t'(i), plane);
      wr(C_BASE + row_t'(i), piv[i] ? '1 : '0);
    end
    // reference: Algorithm 1 with early stop
    m = size_mask(sz);
    e_lbp = '0; decided = ~(en & m); e_cycles = 1;
    for (int i = 7; i >= 0; i--) begin
      for (int c = 0; c < COLS; c++) fresh[c] = (pix[c][i] != piv[i]) && !decided[c];
      e_cycles += 1;
      if (|fresh) begin
        e_cycles += 1;
        for (int c = 0; c < COLS; c++) if (fresh[c]) e_lbp[c] = (piv[i] == 1'b0);
        decided |= fresh;
      end
      if (&decided) break;
    end
    e_cycles += 1;  // done is registered
    cmp_en = en; size = sz; start = 1;
    @(posedge clk); #1; start = 0;
    cycles = 1;
    while (!done && cycles < 100) begin @(posedge clk); #1; cycles++; end
    checks++;
    if ((lbp & m) !== (e_lbp & m)) begin failures++; $display("LBP vector mismatch"); end
    checks++;
    if (cycles != e_cycles) begin failures++; $display("cycles %0d expected %0d", cycles, e_cycles); end
    rd(ROW_LBP, got_row);
    checks++;
    if ((got_row & m) !== (e_lbp & m)) begin failures++; $display("LBP_array row mismatch"); end
  endtask

  initial begin
    logic [7:0] pix [COLS];
    logic [7:0] piv;
    tb_op = '0; start = 0; cmp_en = '1; size = SZ_256;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    wr(ROW_ZERO, '0);
    // worked example: four pixels, pivot MSB 0, result 1001
    piv = 8'h45;
    for (int c = 0; c < COLS; c++) pix[c] = piv;
    pix[3] = 8'hC0; pix[2] = 8'h30; pix[1] = 8'h20; pix[0] = 8'h90;
    run(pix, piv, {{(COLS-4){1'b0}}, 4'hF}, SZ_256);
    checks++;
    if (lbp[3:0] !== 4'b1001) begin failures++; $display("example got %b", lbp[3:0]); end
    // random cases
    for (int t = 0; t < 40; t++) begin
      logic [COLS-1:0] en;
      piv = 8'($urandom);
      for (int c = 0; c < COLS; c++) begin
        case ($urandom_range(0, 3))
          0: pix[c] = piv;
          1: pix[c] = piv ^ (8'd1 << $urandom_range(0, 7));
          default: pix[c] = 8'($urandom);
        endcase
      end
      for (int i = 0; i < COLS / 32; i++) en[i*32 +: 32] = (t % 3 == 0) ? '1 : $urandom;
      run(pix, piv, en, size_e'($urandom_range(0, 2)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
