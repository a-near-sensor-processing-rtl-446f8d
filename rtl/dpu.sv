// dpu: digital processing unit shared by all banks of the slice.
//
// It post-processes values produced by the sub-arrays (MLP dot products or
// mapped LBP pixels) in two pipeline stages:
//   stage 1, batch normalisation: b = (x * scale + bias) >>> frac   (bn_en)
//   stage 2, shifted ReLU:        a = max(b - relu_shift, 0)        (act_en)
//            quantisation:        q = min(a >> qshift, 2^Q_BITS - 1)
// x is unsigned IN_W bits; scale is signed 8-bit, bias signed 16-bit. When a
// function is disabled its stage passes the value through. out_valid follows
// in_valid by two cycles; y is the activation before quantisation and q the
// Q_BITS-bit activation that is written back into the I-region for the next
// layer. The unit's functions (quantisation, activation, batch norm) are from
// the published block diagram; all formulas, widths and the pipeline are this
// design's choices.
module dpu #(
  parameter int IN_W   = 24,
  parameter int Q_BITS = 3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [IN_W-1:0]        x,
  input  logic                   bn_en,
  input  logic signed [7:0]      scale,
  input  logic signed [15:0]     bias,
  input  logic [3:0]             frac,
  input  logic                   act_en,
  input  logic [IN_W-1:0]        relu_shift,
  input  logic [4:0]             qshift,
  output logic                   out_valid,
  output logic [IN_W-1:0]        y,
  output logic [Q_BITS-1:0]      q
);
  localparam int BW = IN_W + 10;

  logic               v1;
  logic signed [BW-1:0] b1;

  logic signed [BW-1:0] bn;
  always_comb begin
    if (bn_en) bn = ($signed({1'b0, x}) * scale + BW'(bias)) >>> frac;
    else       bn = BW'($signed({1'b0, x}));
  end

  logic signed [BW-1:0] act;
  logic [IN_W-1:0] a_sat, a_shr;
  always_comb begin
    act = act_en ? (b1 - BW'($signed({1'b0, relu_shift}))) : b1;
    if (act < 0)                               a_sat = '0;
    else if (act > BW'($signed({1'b0, {IN_W{1'b1}}}))) a_sat = '1;
    else                                       a_sat = act[IN_W-1:0];
    a_shr = a_sat >> qshift;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; b1 <= '0; out_valid <= 1'b0; y <= '0; q <= '0;
    end else begin
      v1        <= in_valid;
      if (in_valid) b1 <= bn;
      out_valid <= v1;
      if (v1) begin
        y <= a_sat;
        q <= (a_shr > IN_W'({Q_BITS{1'b1}})) ? {Q_BITS{1'b1}} : a_shr[Q_BITS-1:0];
      end
    end
  end
endmodule
