// lbp_ctrl: local controller of a compute sub-array that runs the parallel
// bit-wise in-memory LBP algorithm.
//
// Pixels are stored transposed: bit i of the pixel in column j is in row
// p_base+i. The pivot is stored the same way, replicated into every column, in
// rows c_base+i. Starting from the most significant bit the controller
//   1. issues XOR of rows p_base+i, c_base+i and the all-zero row, writing the
//      per-column mismatch vector into the Result_array row;
//   2. if a column that is still undecided shows a mismatch, reads the pivot bit
//      row c_base+i; a mismatching column gets LBP bit 1 when the pivot bit is 0
//      (pixel > pivot) and 0 otherwise, and is then decided;
//   3. moves to the next lower bit, and stops once every enabled column is
//      decided or bit 0 has been compared.
// The LBP vector is then written into the LBP_array row and held on lbp_array.
// Columns with cmp_en = 0 (the comparisons skipped by partial approximate
// computing) and columns beyond `size` are never compared and read 0, as do
// pixels equal to the pivot (Algorithm 1 starts from LBP_array = 0).
//
// Timing: start is sampled when idle; busy rises the next cycle. One cycle for
// the first XOR, then per compared bit one cycle plus one more if a new mismatch
// appeared; the LBP_array write is issued in the last of these cycles and done
// pulses one cycle later. The early stop and the exact schedule are this
// design's; the algorithm itself follows the published one.
module lbp_ctrl
  import nslbp_pkg::*;
#(
  parameter int NBITS = PIX_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  row_t            p_base,
  input  row_t            c_base,
  input  logic [COLS-1:0] cmp_en,
  input  size_e           size,
  output logic            busy,
  output logic            done,
  output logic [COLS-1:0] lbp_array,
  output subarray_op_t    op,
  input  logic [COLS-1:0] array_out
);
  typedef enum logic [1:0] {S_IDLE, S_XOR, S_CHK, S_MEM} state_e;
  state_e state, state_n;

  row_t p_q, c_q;
  size_e size_q;
  logic [$clog2(NBITS)-1:0] bit_q, bit_n;
  logic [COLS-1:0] decided_q, decided_n, lbp_n, pend_q, pend_n, fresh;
  logic done_n;

  function automatic subarray_op_t xor_op(row_t p, row_t c, size_e s);
    subarray_op_t o = '0;
    o.valid = 1'b1; o.ren = 3'b111; o.ra = p; o.rb = c; o.rc = ROW_ZERO;
    o.sel = SA_XOR3; o.wen = 1'b1; o.wa = ROW_RESULT; o.wsrc = WSRC_SA; o.size = s;
    return o;
  endfunction

  function automatic subarray_op_t mem_op(row_t c, size_e s);
    subarray_op_t o = '0;
    o.valid = 1'b1; o.ren = 3'b001; o.ra = c; o.sel = SA_AND3; o.size = s;
    return o;
  endfunction

  function automatic subarray_op_t wr_op(logic [COLS-1:0] d, size_e s);
    subarray_op_t o = '0;
    o.valid = 1'b1; o.wen = 1'b1; o.wa = ROW_LBP; o.wsrc = WSRC_DATA; o.wdata = d; o.size = s;
    return o;
  endfunction

  always_comb begin
    state_n   = state;
    bit_n     = bit_q;
    decided_n = decided_q;
    lbp_n     = lbp_array;
    pend_n    = pend_q;
    done_n    = 1'b0;
    op        = '0;
    fresh     = array_out & ~decided_q;
    unique case (state)
      S_IDLE: if (start) begin
        state_n   = S_XOR;
        bit_n     = $clog2(NBITS)'(NBITS - 1);
        decided_n = ~(cmp_en & size_mask(size));
        lbp_n     = '0;
      end
      S_XOR: begin
        op      = xor_op(p_q + row_t'(bit_q), c_q + row_t'(bit_q), size_q);
        state_n = S_CHK;
      end
      S_CHK: begin
        if (|fresh) begin
          op      = mem_op(c_q + row_t'(bit_q), size_q);
          pend_n  = fresh;
          state_n = S_MEM;
        end else if (bit_q == '0 || &decided_q) begin
          op      = wr_op(lbp_array, size_q);
          done_n  = 1'b1;
          state_n = S_IDLE;
        end else begin
          bit_n   = bit_q - 1'b1;
          op      = xor_op(p_q + row_t'(bit_n), c_q + row_t'(bit_n), size_q);
        end
      end
      S_MEM: begin
        lbp_n     = lbp_array | (pend_q & ~array_out);
        decided_n = decided_q | pend_q;
        if (bit_q == '0 || &decided_n) begin
          op      = wr_op(lbp_n, size_q);
          done_n  = 1'b1;
          state_n = S_IDLE;
        end else begin
          bit_n   = bit_q - 1'b1;
          op      = xor_op(p_q + row_t'(bit_n), c_q + row_t'(bit_n), size_q);
          state_n = S_CHK;
        end
      end
      default: state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      bit_q     <= '0;
      decided_q <= '0;
      lbp_array <= '0;
      pend_q    <= '0;
      done      <= 1'b0;
      p_q       <= '0;
      c_q       <= '0;
      size_q    <= SZ_256;
    end else begin
      state     <= state_n;
      bit_q     <= bit_n;
      decided_q <= decided_n;
      lbp_array <= lbp_n;
      pend_q    <= pend_n;
      done      <= done_n;
      if (state == S_IDLE && start) begin
        p_q    <= p_base;
        c_q    <= c_base;
        size_q <= size;
      end
    end
  end

  always_comb busy = (state != S_IDLE);
endmodule
