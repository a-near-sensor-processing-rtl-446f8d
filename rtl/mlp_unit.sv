// mlp_unit: bit-serial MLP / 1x1-convolution engine built on in-memory AND.
//
// Weights W_k (N-bit) and inputs I_k (M-bit) are stored transposed in one
// sub-array: row w_base+n holds bit n of every weight, row i_base+m bit m of
// every input, one vector element per column. The dot product is
//     sum_k W_k * I_k = sum_m sum_n 2^(m+n) * bitcount(C_n(W) & C_m(I)).
// For every (m, n) the unit issues one AND2 micro-operation (third row: the
// all-one row) on the sub-array; the sensed vector comes back on array_out one
// cycle later, is masked to the first `size` columns, counted (bit-counter),
// shifted left by m+n (shifter) and added into the accumulator.
// Interface/timing: start sampled when idle with wbits/ibits (1..8). One AND per
// cycle, so the last AND is issued wbits*ibits cycles after start and `done`
// pulses with `result` final two cycles later. Unsigned operands only. The
// pipelining and widths are this design's choices.
module mlp_unit
  import nslbp_pkg::*;
#(
  parameter int ACC_W = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  row_t             w_base,
  input  row_t             i_base,
  input  logic [3:0]       wbits,
  input  logic [3:0]       ibits,
  input  size_e            size,
  output subarray_op_t     op,
  input  logic [COLS-1:0]  array_out,
  output logic             busy,
  output logic             done,
  output logic [ACC_W-1:0] result
);
  localparam int CW = $clog2(COLS) + 1;

  function automatic logic [CW-1:0] bitcount(logic [COLS-1:0] v);
    logic [CW-1:0] s = '0;
    for (int c = 0; c < COLS; c++) s += CW'(v[c]);
    return s;
  endfunction

  logic       run_q, pend_q, last_q;
  logic [3:0] m_q, n_q, sh_q, wb_q, ib_q;
  row_t       wbase_q, ibase_q;
  size_e      size_q;
  logic       is_last;

  always_comb begin
    is_last = (m_q == ib_q - 1'b1) && (n_q == wb_q - 1'b1);
    op = '0;
    if (run_q) begin
      op.valid = 1'b1;
      op.ren   = 3'b111;
      op.ra    = wbase_q + row_t'(n_q);
      op.rb    = ibase_q + row_t'(m_q);
      op.rc    = ROW_ONE;
      op.sel   = SA_AND3;
      op.size  = size_q;
    end
    busy = run_q | pend_q | last_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q <= 1'b0; pend_q <= 1'b0; last_q <= 1'b0; done <= 1'b0;
      m_q <= '0; n_q <= '0; sh_q <= '0; wb_q <= 4'd1; ib_q <= 4'd1;
      wbase_q <= '0; ibase_q <= '0; size_q <= SZ_256; result <= '0;
    end else begin
      done <= 1'b0;
      // accumulate the AND issued in the previous cycle
      if (pend_q)
        result <= result + (ACC_W'(bitcount(array_out & size_mask(size_q))) << sh_q);
      if (last_q) done <= 1'b1;
      pend_q <= run_q;
      last_q <= run_q & is_last;
      sh_q   <= m_q + n_q;
      if (!busy && start) begin
        run_q   <= 1'b1;
        m_q     <= '0;
        n_q     <= '0;
        wb_q    <= (wbits == 0) ? 4'd1 : wbits;
        ib_q    <= (ibits == 0) ? 4'd1 : ibits;
        wbase_q <= w_base;
        ibase_q <= i_base;
        size_q  <= size;
        result  <= '0;
      end else if (run_q) begin
        if (is_last) run_q <= 1'b0;
        else if (n_q == wb_q - 1'b1) begin
          n_q <= '0;
          m_q <= m_q + 1'b1;
        end else n_q <= n_q + 1'b1;
      end
    end
  end
endmodule
