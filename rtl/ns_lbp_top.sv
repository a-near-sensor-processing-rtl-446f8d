// ns_lbp_top: one NS-LBP near-sensor cache slice (2.5MB at the default size).
//
// The slice sits between an image sensor and the rest of the system. Pixels
// from the sensor (pix_valid/pix_data) are collected in the transpose buffer;
// instructions (instr_valid/instr/instr_ready) drive the central controller.
// Storage and compute are NBANKS banks of 32KB, each two 16KB mats of two 8KB
// 256x256 compute sub-arrays, so the default 80 banks (20 ways of 4 banks)
// hold 320 sub-arrays. Every sub-array computes three-row Boolean functions in
// one cycle and has a local controller for the in-memory LBP algorithm. The
// central controller also runs the bit-serial MLP engine, and feeds the DPU
// (batch norm, shifted ReLU, quantisation) with either MLP sums or LBP rows
// fused by the PAC mapper.
//
// Results: rd_valid/rd_data (READ, two cycles after issue), mlp_done/mlp_result,
// map_valid/map_pix (MAP: the fused, approximated output pixel), and
// dpu_valid/dpu_y/dpu_q two cycles after the DPU input (an MLP sum or a mapped
// pixel). lbp_done pulses when any local LBP controller finishes.
// MAP configuration (instr.imm): bits [MBITS*CHW-1:0] the projection map
// (entry k in bits [k*CHW +: CHW]), bits [10:8] the number of approximated
// bits, bits [31:24] the column of channel 0 bit 0; channel c bit k is read
// from column offset + c*MBITS + k. The DPU coefficients are static inputs.
// The sensor, its analog readout and the bus fabric are outside this module;
// their signals are its ports. Port set and MAP encoding are this design's.
// Lint notes: the transpose buffer's fill count and full flag are not used,
// because the host streams exactly one row of pixels before each LOADT.
// Unused MAP immediate bits are reserved. rst_n is also used by an assertion
// (disable iff), which lint reports as a synchronous use of the async reset.
module ns_lbp_top
  import nslbp_pkg::*;
#(
  parameter int NBANKS = 80,
  parameter int NCH    = 2,
  parameter int MBITS  = 4,
  parameter int ACC_W  = 24,
  parameter int Q_BITS = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                pix_valid,
  input  logic [PIX_W-1:0]    pix_data,
  input  logic                instr_valid,
  input  instr_t              instr,
  output logic                instr_ready,
  output logic                busy,
  output logic                rd_valid,
  output logic [COLS-1:0]     rd_data,
  output logic                mlp_done,
  output logic [ACC_W-1:0]    mlp_result,
  output logic                lbp_done,
  output logic                map_valid,
  output logic [MBITS-1:0]    map_pix,
  input  logic                dpu_bn_en,
  input  logic signed [7:0]   dpu_scale,
  input  logic signed [15:0]  dpu_bias,
  input  logic [3:0]          dpu_frac,
  input  logic                dpu_act_en,
  input  logic [ACC_W-1:0]    dpu_relu_shift,
  input  logic [4:0]          dpu_qshift,
  output logic                dpu_valid,
  output logic [ACC_W-1:0]    dpu_y,
  output logic [Q_BITS-1:0]   dpu_q
);
  localparam int NSUB = NBANKS * 4;
  localparam int CHW  = (NCH > 1) ? $clog2(NCH) : 1;

  // ---------------- transpose buffer
  logic [$clog2(PIX_W)-1:0] tb_plane;
  logic [COLS-1:0]          tb_data;
  logic                     tb_clear, tb_full;
  logic [$clog2(COLS):0]    tb_count;
  transpose_buffer u_tbuf (
    .clk(clk), .rst_n(rst_n), .pix_valid(pix_valid), .pix(pix_data), .clear(tb_clear),
    .plane(tb_plane), .plane_data(tb_data), .count(tb_count), .full(tb_full)
  );

  // ---------------- central controller
  subarray_op_t    op;
  logic [NSUB-1:0] op_sel, lbp_start, lbp_busy, lbp_dn;
  row_t            p_base, c_base;
  logic [COLS-1:0] cmp_en, rdata_in, map_row;
  size_e           lbp_size;
  logic [SUB_AW-1:0] rd_sub;
  logic [31:0]     map_cfg;

  ns_lbp_ctrl #(.NSUB(NSUB), .ACC_W(ACC_W)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .instr_valid(instr_valid), .instr(instr),
    .instr_ready(instr_ready), .op(op), .op_sel(op_sel), .lbp_start(lbp_start),
    .p_base(p_base), .c_base(c_base), .cmp_en(cmp_en), .lbp_size(lbp_size),
    .lbp_busy(lbp_busy), .rd_sub(rd_sub), .rdata_in(rdata_in), .tb_plane(tb_plane),
    .tb_data(tb_data), .tb_clear(tb_clear), .rd_valid(rd_valid), .rd_data(rd_data),
    .mlp_done(mlp_done), .mlp_result(mlp_result), .map_valid(map_valid),
    .map_row(map_row), .map_cfg(map_cfg), .busy(busy)
  );

  // ---------------- banks
  logic [COLS-1:0] bank_rdata [NBANKS];
  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    ns_lbp_bank u_bank (
      .clk(clk), .rst_n(rst_n), .op(op), .op_sel(op_sel[b*4 +: 4]),
      .lbp_start(lbp_start[b*4 +: 4]), .p_base(p_base), .c_base(c_base),
      .cmp_en(cmp_en), .size(lbp_size), .rd_sel(rd_sub[1:0]), .rdata(bank_rdata[b]),
      .lbp_busy(lbp_busy[b*4 +: 4]), .lbp_done(lbp_dn[b*4 +: 4])
    );
  end

  always_comb begin
    rdata_in = '0;
    if (int'(rd_sub[SUB_AW-1:2]) < NBANKS) rdata_in = bank_rdata[rd_sub[SUB_AW-1:2]];
    lbp_done = |lbp_dn;
  end

  // ---------------- PAC mapper
  logic [NCH-1:0][MBITS-1:0]  ch;
  logic [MBITS-1:0][CHW-1:0]  pmap;
  logic [$clog2(MBITS+1)-1:0] apx;
  always_comb begin
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < MBITS; k++)
        ch[c][k] = map_row[(int'(map_cfg[31:24]) + c*MBITS + k) % COLS];
    pmap = map_cfg[MBITS*CHW-1:0];
    apx  = map_cfg[8 +: $clog2(MBITS+1)];
  end
  pac_mapper #(.NCH(NCH), .MBITS(MBITS)) u_pac (.ch(ch), .map(pmap), .apx(apx), .pix(map_pix));

  // ---------------- DPU
  logic [ACC_W-1:0] dpu_x;
  always_comb dpu_x = mlp_done ? mlp_result : ACC_W'(map_pix);
  dpu #(.IN_W(ACC_W), .Q_BITS(Q_BITS)) u_dpu (
    .clk(clk), .rst_n(rst_n), .in_valid(mlp_done | map_valid), .x(dpu_x),
    .bn_en(dpu_bn_en), .scale(dpu_scale), .bias(dpu_bias), .frac(dpu_frac),
    .act_en(dpu_act_en), .relu_shift(dpu_relu_shift), .qshift(dpu_qshift),
    .out_valid(dpu_valid), .y(dpu_y), .q(dpu_q)
  );
endmodule
