// tb_cap_maj3: exhaustive check of the capacitive majority unit, and of the
// identity MAJ(OR3, MIN, AND3) = XOR3 for every three-cv pattern.
module tb_cap_maj3;
  int checks = 0, failures = 0;
  logic a, b, c, y;
  cap_maj3 dut (.or3(a), .min3(b), .and3(c), .xor3(y));
  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      checks++;
      if (y !== ((a + b + c) >= 2)) begin failures++; $display("maj fail %b", v[2:0]); end
    end
    for (int v = 0; v < 8; v++) begin
      logic [2:0] cv;
      int ones;
      cv = 3'(v);
      ones = cv[0] + cv[1] + cv[2];
      a = (ones >= 1); b = !(ones >= 2); c = (ones == 3);
      #1;
      checks++;
      if (y !== (cv[0] ^ cv[1] ^ cv[2])) begin failures++; $display("xor3 fail %b", cv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
