// tb_reconfig_sa: random RBL levels on 16 columns, every Out_S setting, both
// polarities and sae low; outputs compared with the threshold functions.
module tb_reconfig_sa;
  import nslbp_pkg::*;
  localparam int N = 16;
  int checks = 0, failures = 0;
  logic [N-1:0][1:0] level;
  logic sae, inv;
  sa_sel_e sel;
  logic [N-1:0] out;
  reconfig_sa #(.NCOL(N)) dut (.level(level), .sae(sae), .out_s(sel), .inv(inv), .array_out(out));
  initial begin
    for (int t = 0; t < 400; t++) begin
      for (int c = 0; c < N; c++) level[c] = 2'($urandom_range(0, 3));
      sel = sa_sel_e'($urandom_range(0, 3));
      inv = 1'($urandom);
      sae = ($urandom_range(0, 9) != 0);
      #1;
      for (int c = 0; c < N; c++) begin
        logic e;
        int l;
        l = level[c];
        case (sel)
          SA_OR3:  e = (l >= 1);
          SA_XOR3: e = (l == 1) || (l == 3);
          SA_MAJ:  e = (l >= 2);
          default: e = (l == 3);
        endcase
        e = sae ? (e ^ inv) : 1'b0;
        checks++;
        if (out[c] !== e) begin
          failures++;
          if (failures < 10) $display("col %0d level %0d sel %0d inv %0b: got %0b exp %0b", c, l, sel, inv, out[c], e);
        end
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
