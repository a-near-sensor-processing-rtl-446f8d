// transpose_buffer: turns a stream of pixels into bit planes for the P-region.
//
// Pixels arrive one per cycle (pix_valid, pix) and fill columns 0, 1, 2, ... of
// the buffer. Row i of the sub-array must hold bit i of every pixel, so the
// buffer presents bit plane `plane` (bit `plane` of each buffered pixel, one
// column per pixel) combinationally on plane_data. `clear` empties the buffer
// (all columns back to 0) and restarts filling at column 0; it wins over a
// pixel in the same cycle. Pixels beyond the last column are dropped and flagged
// on `full`. The fill order and clear behaviour are this design's choices.
module transpose_buffer
  import nslbp_pkg::*;
#(
  parameter int NCOL = COLS,
  parameter int PW   = PIX_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  pix_valid,
  input  logic [PW-1:0]         pix,
  input  logic                  clear,
  input  logic [$clog2(PW)-1:0] plane,
  output logic [NCOL-1:0]       plane_data,
  output logic [$clog2(NCOL):0] count,
  output logic                  full
);
  logic [PW-1:0] buf_q [NCOL];

  always_comb full = (count == ($clog2(NCOL)+1)'(NCOL));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int c = 0; c < NCOL; c++) buf_q[c] <= '0;
    end else if (clear) begin
      count <= '0;
      for (int c = 0; c < NCOL; c++) buf_q[c] <= '0;
    end else if (pix_valid && !full) begin
      buf_q[count[$clog2(NCOL)-1:0]] <= pix;
      count <= count + 1'b1;
    end
  end

  always_comb
    for (int c = 0; c < NCOL; c++) plane_data[c] = buf_q[c][plane];
endmodule
