// tb_row_decoder: random addresses and enables; word lines compared with a
// reference built from the addresses.
module tb_row_decoder;
  int checks = 0, failures = 0;
  logic [7:0] ra, rb, rc, wa;
  logic [2:0] ren;
  logic wen;
  logic [255:0] rwl, wwl, e_r, e_w;
  row_decoder #(.NROW(256)) dut (.ra(ra), .rb(rb), .rc(rc), .ren(ren), .wa(wa), .wen(wen), .rwl(rwl), .wwl(wwl));
  initial begin
    for (int t = 0; t < 2000; t++) begin
      ra = 8'($urandom); rb = 8'($urandom); rc = (t % 5 == 0) ? ra : 8'($urandom);
      wa = 8'($urandom); ren = 3'($urandom); wen = 1'($urandom);
      #1;
      e_r = '0; e_w = '0;
      for (int r = 0; r < 256; r++) begin
        e_r[r] = (ren[0] && ra == r) || (ren[1] && rb == r) || (ren[2] && rc == r);
        e_w[r] = wen && wa == r;
      end
      checks++;
      if (rwl !== e_r || wwl !== e_w) begin
        failures++;
        if (failures < 10) $display("mismatch ra=%0d rb=%0d rc=%0d ren=%b", ra, rb, rc, ren);
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
