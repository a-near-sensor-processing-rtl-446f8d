// tb_transpose_buffer: streams random pixels (with gaps), checks every bit
// plane against the pixels, the fill count, the full flag, dropping beyond the
// last column and the clear.
module tb_transpose_buffer;
  import nslbp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pv, clr, full;
  logic [7:0] px;
  logic [2:0] plane;
  logic [COLS-1:0] pd;
  logic [8:0] count;
  logic [7:0] ref_px [COLS];
  transpose_buffer dut (.clk(clk), .rst_n(rst_n), .pix_valid(pv), .pix(px), .clear(clr),
                        .plane(plane), .plane_data(pd), .count(count), .full(full));
  task automatic check_planes(int n);
    for (int p = 0; p < 8; p++) begin
      plane = 3'(p);
      #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (pd[c] !== ((c < n) ? ref_px[c][p] : 1'b0)) begin
          failures++;
          if (failures < 10) $display("plane %0d col %0d wrong", p, c);
        end
      end
    end
  endtask
  initial begin
    pv = 0; clr = 0; px = 0; plane = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int round = 0; round < 3; round++) begin
      int n, sent;
      n = (round == 0) ? 100 : COLS + 5;
      sent = 0;
      while (sent < n) begin
        pv = ($urandom_range(0, 3) != 0);
        px = 8'($urandom);
        if (pv && sent < COLS) ref_px[sent] = px;
        @(posedge clk); #1;
        if (pv) sent++;
      end
      pv = 0;
      checks++;
      if (int'(count) != ((n > COLS) ? COLS : n)) begin failures++; $display("count %0d", count); end
      checks++;
      if (full !== (n >= COLS)) begin failures++; $display("full flag"); end
      check_planes((n > COLS) ? COLS : n);
      clr = 1; @(posedge clk); #1; clr = 0;
      checks++;
      if (count != 0) failures++;
      check_planes(0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
