// tb_command_decoder: every ISA instruction is decoded and executed on a
// compute sub-array; the destination row (or the READ data) is compared with
// the instruction's published semantics computed on a reference copy of the
// array. Macro opcodes must produce no micro-operation.
module tb_command_decoder;
  import nslbp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  instr_t ins;
  logic ivalid, macro, is_read, ovalid;
  subarray_op_t op;
  logic [COLS-1:0] aout;
  logic [COLS-1:0] model [ROWS];
  command_decoder dut (.instr(ins), .valid(ivalid), .op(op), .macro(macro), .is_read(is_read));
  compute_subarray u_sub (.clk(clk), .rst_n(rst_n), .op(op), .array_out(aout), .out_valid(ovalid));

  function automatic logic [COLS-1:0] rnd_row();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic exec(instr_t i);
    ins = i; ivalid = 1;
    @(posedge clk); #1;
    ivalid = 0; ins = '0;
  endtask

  initial begin
    instr_t i;
    logic [COLS-1:0] a, b, c, e, m, got;
    ins = '0; ivalid = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int r = 0; r < ROWS; r++) begin
      i = '0; i.opcode = OP_WRITE; i.dest = row_t'(r); i.size = SZ_256; i.data = rnd_row();
      if (r == ROW_ZERO) i.data = '0;
      if (r == ROW_ONE) i.data = '1;
      model[r] = i.data;
      exec(i);
    end
    for (int t = 0; t < 600; t++) begin
      i = '0;
      i.opcode = opcode_e'($urandom_range(1, 11));
      i.src1 = row_t'($urandom_range(0, 127));
      i.src2 = row_t'($urandom_range(0, 127));
      i.src3 = row_t'($urandom_range(0, 127));
      // three-row operands must name distinct rows (one word line per row)
      while (i.src2 == i.src1) i.src2 = row_t'($urandom_range(0, 127));
      while (i.src3 == i.src1 || i.src3 == i.src2) i.src3 = row_t'($urandom_range(0, 127));
      i.dest = row_t'($urandom_range(192, 255));
      i.size = size_e'($urandom_range(0, 2));
      i.imm  = $urandom;
      i.data = rnd_row();
      a = model[i.src1]; b = model[i.src2]; c = model[i.src3];
      m = size_mask(i.size);
      case (i.opcode)
        OP_READ:   e = a;
        OP_WRITE:  e = i.data;
        OP_COPY:   e = a;
        OP_INI:    e = i.imm[0] ? '1 : '0;
        OP_CMP:    e = a ^ b;
        OP_SEARCH: e = ~(a ^ b);
        OP_NAND3:  e = ~(a & b & c);
        OP_NOR3:   e = ~(a | b | c);
        OP_MAJ3:   e = (a & b) | (a & c) | (b & c);
        OP_XOR3:   e = a ^ b ^ c;
        default:   e = a & b;  // OP_AND2
      endcase
      exec(i);
      if (i.opcode == OP_READ) begin
        checks++;
        if (aout !== e) begin failures++; $display("READ mismatch"); end
      end else begin
        row_t w;
        w = (i.opcode == OP_INI) ? i.src1 : i.dest;
        model[w] = (model[w] & ~m) | (e & m);
        // read the row back
        i = '0; i.opcode = OP_READ; i.src1 = w;
        exec(i);
        checks++;
        if (aout !== model[w]) begin
          failures++;
          if (failures < 10) $display("t=%0d opcode %0d wrong result", t, i.opcode);
        end
      end
    end
    for (int k = 12; k < 16; k++) begin
      ins = '0; ins.opcode = opcode_e'(k); ivalid = 1;
      #1;
      checks++;
      if (op.valid !== 1'b0 || macro !== 1'b1) begin failures++; $display("macro %0d issued an op", k); end
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
