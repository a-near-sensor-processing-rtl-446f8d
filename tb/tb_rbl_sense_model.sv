// tb_rbl_sense_model: drives every combination of activated word lines and
// stored data values through precharge, evaluate and sense. It checks the
// bit-line level against the printed millivolt table and the three sub-SA
// outputs against a count of the '1' cells, with inactive rows counted as '1'.
// It also checks that the sense margin is the 55 mV between 495 mV and VR2 (550 mV).
module tb_rbl_sense_model;
  int checks = 0, failures = 0;
  logic pre = 1, sae = 0;
  logic [2:0] rwl = '0, data = '0;
  real v, m;
  logic or3, maj3, and3;
  rbl_sense_model dut (.pre(pre), .rwl(rwl), .data(data), .sae(sae), .v_rbl_mv(v),
                       .or3(or3), .maj3(maj3), .and3(and3), .margin_mv(m));
  real exp_mv [4];
  initial begin
    int ones;
    exp_mv[0] = 280.0; exp_mv[1] = 495.0; exp_mv[2] = 735.0; exp_mv[3] = 950.0;
    #1;
    checks++;
    if (m != 55.0) begin failures++; $display("margin %f", m); end
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        pre = 1; rwl = 3'(r); data = 3'(c); #2;
        checks++;
        if (v != 1100.0) begin failures++; $display("precharge level %f", v); end
        pre = 0; #3;
        ones = 0;
        for (int k = 0; k < 3; k++) if (!rwl[k] || data[k]) ones++;
        checks++;
        if (v != exp_mv[ones]) begin failures++; $display("rwl=%b data=%b v=%f", rwl, data, v); end
        sae = 1; #1; sae = 0; #1;
        checks++;
        if (or3 !== (ones >= 1) || maj3 !== (ones >= 2) || and3 !== (ones == 3)) begin
          failures++; $display("rwl=%b data=%b sa=%b%b%b", rwl, data, or3, maj3, and3);
        end
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
