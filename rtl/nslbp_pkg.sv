// nslbp_pkg: shared constants and types of the NS-LBP processing-in-SRAM cache.
//
// The compute sub-array is 256 rows x 256 columns (8KB). Its rows are split into
// regions: pixels (P, rows 0-63), pivots (C, rows 64-127), reserved (rows 128-191),
// weights (W, rows 192-223) and inputs (I, rows 224-255). Region sizes follow the
// published mapping; the order of the regions in the address space and the fixed
// rows inside the reserved region (Result_array, LBP_array, all-zero, all-one) are
// choices of this design. The all-one row is an addition used for 2-input AND.
//
// subarray_op_t is the micro-operation one sub-array executes in one clock:
// up to three read word lines, a sense-amplifier output select, and an optional
// write of the sensed result (or of supplied data) into one row.
// instr_t is the instruction word accepted by the central controller; its
// opcodes cover the published ISA (copy, ini, cmp/xor2, search, nand3, nor3,
// carry/maj3, sum/xor3) plus memory read/write, and2 and the macro operations
// (transposed load, in-memory LBP, MLP dot product, PAC mapping) of this design.
package nslbp_pkg;

  localparam int ROWS   = 256;
  localparam int COLS   = 256;
  localparam int ROW_AW = 8;
  localparam int PIX_W  = 8;

  typedef logic [ROW_AW-1:0] row_t;

  localparam row_t P_BASE     = 8'd0;
  localparam row_t C_BASE     = 8'd64;
  localparam row_t RESV_BASE  = 8'd128;
  localparam row_t W_BASE     = 8'd192;
  localparam row_t I_BASE     = 8'd224;
  localparam row_t ROW_RESULT = 8'd128;
  localparam row_t ROW_LBP    = 8'd129;
  localparam row_t ROW_ZERO   = 8'd130;
  localparam row_t ROW_ONE    = 8'd131;

  // Sense-amplifier output select (Out_S). Order of the mux inputs as drawn:
  // OR3, XOR3, the middle sub-SA (MAJ, labelled Mem), AND3.
  typedef enum logic [1:0] {
    SA_OR3  = 2'd0,
    SA_XOR3 = 2'd1,
    SA_MAJ  = 2'd2,
    SA_AND3 = 2'd3
  } sa_sel_e;

  // Operation size n: number of columns (from column 0) that an operation writes.
  typedef enum logic [1:0] {
    SZ_256 = 2'd0,
    SZ_128 = 2'd1,
    SZ_64  = 2'd2
  } size_e;

  typedef enum logic {
    WSRC_SA   = 1'b0,
    WSRC_DATA = 1'b1
  } wsrc_e;

  typedef struct packed {
    logic            valid;
    logic [2:0]      ren;    // read word-line enables for ra, rb, rc
    row_t            ra;
    row_t            rb;
    row_t            rc;
    sa_sel_e         sel;
    logic            inv;    // take the complementary SA output
    logic            wen;
    row_t            wa;
    wsrc_e           wsrc;
    size_e           size;
    logic [COLS-1:0] wdata;
  } subarray_op_t;

  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,
    OP_READ   = 4'd1,
    OP_WRITE  = 4'd2,
    OP_COPY   = 4'd3,
    OP_INI    = 4'd4,
    OP_CMP    = 4'd5,   // xor2 against the all-zero row
    OP_SEARCH = 4'd6,
    OP_NAND3  = 4'd7,
    OP_NOR3   = 4'd8,
    OP_MAJ3   = 4'd9,   // carry
    OP_XOR3   = 4'd10,  // sum
    OP_AND2   = 4'd11,
    OP_LOADT  = 4'd12,  // write transposed pixel planes into rows dest..dest+7
    OP_LBP    = 4'd13,  // run the in-memory LBP algorithm in the local controller
    OP_MLP    = 4'd14,  // bit-serial AND / bitcount / shift / add dot product
    OP_MAP    = 4'd15   // read an LBP row, PAC-map it and pass it through the DPU
  } opcode_e;

  localparam int SUB_AW = 9;  // up to 512 sub-arrays (320 in the full slice)

  typedef struct packed {
    opcode_e         opcode;
    logic            bcast;  // apply to every sub-array
    logic [SUB_AW-1:0] sub;  // target sub-array when bcast = 0
    row_t            src1;
    row_t            src2;
    row_t            src3;
    row_t            dest;
    size_e           size;
    logic [31:0]     imm;
    logic [COLS-1:0] data;   // row data for OP_WRITE, column enables for OP_LBP
  } instr_t;

  function automatic logic [COLS-1:0] size_mask(size_e s);
    logic [COLS-1:0] m;
    unique case (s)
      SZ_64:   m = {{(COLS-64){1'b0}},  {64{1'b1}}};
      SZ_128:  m = {{(COLS-128){1'b0}}, {128{1'b1}}};
      default: m = '1;  // SZ_256 (and the unused code 3)
    endcase
    return m;
  endfunction

endpackage
