// tb_mlp_unit: weights and inputs of random widths (1..8 bits) are written
// transposed into the W- and I-regions of a compute sub-array; the MLP engine's
// dot product is compared with sum_k W_k * I_k computed directly, and the cycle
// count from start to done with wbits*ibits + 2.
module tb_mlp_unit;
  import nslbp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  subarray_op_t tb_op, mop, sop;
  logic [COLS-1:0] aout;
  logic ovalid, start, busy, done;
  logic [3:0] wb, ib;
  size_e size;
  logic [23:0] result;
  mlp_unit dut (.clk(clk), .rst_n(rst_n), .start(start), .w_base(W_BASE), .i_base(I_BASE),
                .wbits(wb), .ibits(ib), .size(size), .op(mop), .array_out(aout), .busy(busy),
                .done(done), .result(result));
  always_comb sop = busy ? mop : tb_op;
  compute_subarray u_sub (.clk(clk), .rst_n(rst_n), .op(sop), .array_out(aout), .out_valid(ovalid));

  task automatic wr(row_t r, logic [COLS-1:0] d);
    tb_op = '0; tb_op.valid = 1; tb_op.wen = 1; tb_op.wa = r; tb_op.wsrc = WSRC_DATA;
    tb_op.wdata = d; tb_op.size = SZ_256;
    @(posedge clk); #1; tb_op = '0;
  endtask

  initial begin
    logic [7:0] w [COLS];
    logic [7:0] x [COLS];
    logic [COLS-1:0] plane;
    int unsigned expect_sum;
    int n, cycles;
    tb_op = '0; start = 0; wb = 1; ib = 1; size = SZ_256;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    wr(ROW_ONE, '1);
    for (int t = 0; t < 30; t++) begin
      wb = 4'($urandom_range(1, 8));
      ib = 4'($urandom_range(1, 8));
      if (t == 0) begin wb = 3; ib = 3; end
      size = size_e'($urandom_range(0, 2));
      n = (size == SZ_64) ? 64 : (size == SZ_128) ? 128 : 256;
      for (int c = 0; c < COLS; c++) begin
        w[c] = 8'($urandom) & 8'((1 << wb) - 1);
        x[c] = 8'($urandom) & 8'((1 << ib) - 1);
      end
      for (int b = 0; b < 8; b++) begin
        for (int c = 0; c < COLS; c++) plane[c] = w[c][b];
        wr(W_BASE + row_t'(b), plane);
        for (int c = 0; c < COLS; c++) plane[c] = x[c][b];
        wr(I_BASE + row_t'(b), plane);
      end
      expect_sum = 0;
      for (int c = 0; c < n; c++) expect_sum += w[c] * x[c];
      start = 1; @(posedge clk); #1; start = 0;
      cycles = 1;
      while (!done && cycles < 200) begin @(posedge clk); #1; cycles++; end
      checks++;
      if (result !== 24'(expect_sum)) begin failures++; $display("t=%0d sum %0d expected %0d", t, result, expect_sum); end
      checks++;
      if (cycles != wb * ib + 2) begin failures++; $display("cycles %0d expected %0d", cycles, wb*ib+2); end
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
