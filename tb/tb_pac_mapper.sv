// tb_pac_mapper: the published example (channels A and B, mapping table
// B,A,B,A, one approximated bit: output = 8*b3 + 4*a2 + 2*b1), then random
// channel responses, tables and apx values against a reference.
module tb_pac_mapper;
  int checks = 0, failures = 0;
  logic [1:0][3:0] ch;
  logic [3:0][0:0] map;
  logic [2:0] apx;
  logic [3:0] pix;
  pac_mapper #(.NCH(2), .MBITS(4)) dut (.ch(ch), .map(map), .apx(apx), .pix(pix));
  initial begin
    // channel A = index 0, channel B = index 1; table from bit 3 down: B A B A
    map = {1'b1, 1'b0, 1'b1, 1'b0};
    apx = 1;
    for (int v = 0; v < 256; v++) begin
      logic [3:0] a, b;
      a = v[3:0]; b = v[7:4];
      ch[0] = a; ch[1] = b;
      #1;
      checks++;
      if (pix !== 4'(8*b[3] + 4*a[2] + 2*b[1])) begin failures++; $display("example a=%b b=%b got %b", a, b, pix); end
    end
    for (int t = 0; t < 2000; t++) begin
      logic [3:0] e;
      ch = 8'($urandom); map = 4'($urandom); apx = 3'($urandom_range(0, 4));
      #1;
      for (int k = 0; k < 4; k++) e[k] = (k < apx) ? 1'b0 : ch[map[k]][k];
      checks++;
      if (pix !== e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
