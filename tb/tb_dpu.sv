// tb_dpu: random values and coefficients through the DPU pipeline; y and q are
// compared with the batch-norm / shifted-ReLU / quantisation formulas, and
// out_valid must follow in_valid by exactly two cycles.
module tb_dpu;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ov, bn_en, act_en;
  logic [23:0] x, rs, y;
  logic signed [7:0] scale;
  logic signed [15:0] bias;
  logic [3:0] frac;
  logic [4:0] qs;
  logic [2:0] q;
  dpu #(.IN_W(24), .Q_BITS(3)) dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .x(x), .bn_en(bn_en),
      .scale(scale), .bias(bias), .frac(frac), .act_en(act_en), .relu_shift(rs), .qshift(qs),
      .out_valid(ov), .y(y), .q(q));
  initial begin
    longint b, a, ey, eq;
    iv = 0; x = 0; bn_en = 0; act_en = 0; rs = 0; scale = 1; bias = 0; frac = 0; qs = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int t = 0; t < 1000; t++) begin
      x = 24'($urandom_range(0, 5000));
      bn_en = 1'($urandom); act_en = 1'($urandom);
      scale = 8'($urandom); bias = 16'($urandom); frac = 4'($urandom_range(0, 6));
      rs = 24'($urandom_range(0, 3000)); qs = 5'($urandom_range(0, 12));
      b = bn_en ? ((longint'(x) * scale + bias) >>> frac) : longint'(x);
      a = act_en ? b - longint'(rs) : b;
      ey = (a < 0) ? 0 : (a > 24'hFFFFFF) ? 24'hFFFFFF : a;
      eq = ey >> qs;
      if (eq > 7) eq = 7;
      iv = 1;
      @(posedge clk); #1;
      iv = 0;
      checks++;
      if (ov !== 1'b0) begin failures++; $display("early valid"); end
      @(posedge clk); #1;
      checks++;
      if (ov !== 1'b1 || y !== 24'(ey) || q !== 3'(eq)) begin
        failures++;
        if (failures < 10) $display("t=%0d x=%0d y=%0d/%0d q=%0d/%0d", t, x, y, ey, q, eq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
