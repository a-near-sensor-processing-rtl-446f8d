// command_decoder: turns one NS-LBP instruction into a sub-array micro-operation.
//
// Memory-mode and bit-wise ISA instructions map onto a single sub-array cycle:
//   READ   r1          : raise one word line, sense with the AND3 sub-SA
//   WRITE  dest <- data
//   COPY   r2 <- r1    : read r1 and write the sensed row into dest
//   INI    r1 <- all 0 / all 1 (imm[0])
//   CMP    r3 <- r1 ^ r2          (third row: all-zero row)
//   SEARCH r3 <- ~(r1 ^ k)        (k = src2, a row address; bit-wise equality)
//   NAND3 / NOR3 / MAJ3 (carry) / XOR3 (sum) of r1, r2, r3 into dest
//   AND2   dest <- r1 & r2        (third row: all-one row)
// Macro instructions (LOADT, LBP, MLP, MAP) are flagged on `macro` and produce
// no micro-operation here; the central controller sequences them.
// The opcode encoding and the use of the all-one row for AND2 are this design's;
// the operations and their operand roles follow the published ISA table.
// Combinational.
// Lint note: the fields that only the central controller uses (sub-array
// index, broadcast bit) are unused here.
module command_decoder
  import nslbp_pkg::*;
(
  input  instr_t       instr,
  input  logic         valid,
  output subarray_op_t op,
  output logic         macro,
  output logic         is_read
);
  always_comb begin
    op       = '0;
    op.size  = instr.size;
    op.ra    = instr.src1;
    op.rb    = instr.src2;
    op.rc    = instr.src3;
    op.wa    = instr.dest;
    op.wsrc  = WSRC_SA;
    macro    = 1'b0;
    is_read  = 1'b0;
    unique case (instr.opcode)
      OP_READ:   begin op.ren = 3'b001; op.sel = SA_AND3; is_read = 1'b1; end
      OP_WRITE:  begin op.wen = 1'b1; op.wsrc = WSRC_DATA; op.wdata = instr.data; end
      OP_COPY:   begin op.ren = 3'b001; op.sel = SA_AND3; op.wen = 1'b1; end
      OP_INI:    begin op.wen = 1'b1; op.wa = instr.src1; op.wsrc = WSRC_DATA;
                       op.wdata = instr.imm[0] ? '1 : '0; end
      OP_CMP:    begin op.ren = 3'b111; op.rc = ROW_ZERO; op.sel = SA_XOR3; op.wen = 1'b1; end
      OP_SEARCH: begin op.ren = 3'b111; op.rc = ROW_ZERO; op.sel = SA_XOR3; op.inv = 1'b1;
                       op.wen = 1'b1; end
      OP_NAND3:  begin op.ren = 3'b111; op.sel = SA_AND3; op.inv = 1'b1; op.wen = 1'b1; end
      OP_NOR3:   begin op.ren = 3'b111; op.sel = SA_OR3;  op.inv = 1'b1; op.wen = 1'b1; end
      OP_MAJ3:   begin op.ren = 3'b111; op.sel = SA_MAJ;  op.wen = 1'b1; end
      OP_XOR3:   begin op.ren = 3'b111; op.sel = SA_XOR3; op.wen = 1'b1; end
      OP_AND2:   begin op.ren = 3'b111; op.rc = ROW_ONE; op.sel = SA_AND3; op.wen = 1'b1; end
      OP_LOADT, OP_LBP, OP_MLP, OP_MAP: macro = 1'b1;
      default: ;
    endcase
    op.valid = valid & ~macro & (instr.opcode != OP_NOP);
  end
endmodule
