// tb_ns_lbp_ctrl: the central controller driving one bank (four sub-arrays)
// and the transpose buffer. Checks the instruction handshake, READ latency,
// broadcast vs. addressed operations, the transposed load of streamed pixels,
// an LBP run started by instruction, an MLP dot product and a MAP read.
module tb_ns_lbp_ctrl;
  import nslbp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ivalid, iready, busy, rd_valid, mlp_done, map_valid, tb_clear, pv;
  instr_t ins;
  subarray_op_t op;
  logic [3:0] op_sel, lbp_start, lbp_busy, lbp_done;
  row_t p_base, c_base;
  logic [COLS-1:0] cmp_en, rdata_in, rd_data, map_row, tb_data;
  size_e lbp_size;
  logic [SUB_AW-1:0] rd_sub;
  logic [2:0] tb_plane;
  logic [23:0] mlp_result;
  logic [31:0] map_cfg;
  logic [7:0] px;
  logic [8:0] tb_count;
  logic tb_full;

  ns_lbp_ctrl #(.NSUB(4)) dut (
    .clk(clk), .rst_n(rst_n), .instr_valid(ivalid), .instr(ins), .instr_ready(iready),
    .op(op), .op_sel(op_sel), .lbp_start(lbp_start), .p_base(p_base), .c_base(c_base),
    .cmp_en(cmp_en), .lbp_size(lbp_size), .lbp_busy(lbp_busy), .rd_sub(rd_sub),
    .rdata_in(rdata_in), .tb_plane(tb_plane), .tb_data(tb_data), .tb_clear(tb_clear),
    .rd_valid(rd_valid), .rd_data(rd_data), .mlp_done(mlp_done), .mlp_result(mlp_result),
    .map_valid(map_valid), .map_row(map_row), .map_cfg(map_cfg), .busy(busy));
  ns_lbp_bank u_bank (.clk(clk), .rst_n(rst_n), .op(op), .op_sel(op_sel), .lbp_start(lbp_start),
    .p_base(p_base), .c_base(c_base), .cmp_en(cmp_en), .size(lbp_size), .rd_sel(rd_sub[1:0]),
    .rdata(rdata_in), .lbp_busy(lbp_busy), .lbp_done(lbp_done));
  transpose_buffer u_tb (.clk(clk), .rst_n(rst_n), .pix_valid(pv), .pix(px), .clear(tb_clear),
    .plane(tb_plane), .plane_data(tb_data), .count(tb_count), .full(tb_full));

  int issue_cycle, cyc;
  always @(posedge clk) cyc++;

  task automatic send(instr_t i);
    ins = i; ivalid = 1;
    while (!iready) begin @(posedge clk); #1; end
    @(posedge clk);
    issue_cycle = cyc;
    #1; ivalid = 0; ins = '0;
  endtask
  task automatic wait_idle();
    while (busy) begin @(posedge clk); #1; end
  endtask
  task automatic read_row(int s, row_t r, output logic [COLS-1:0] d);
    instr_t i;
    i = '0; i.opcode = OP_READ; i.sub = SUB_AW'(s); i.src1 = r;
    send(i);
    while (!rd_valid) begin @(posedge clk); #1; end
    checks++;
    if (cyc - issue_cycle != 2) begin failures++; $display("READ latency %0d", cyc - issue_cycle); end
    d = rd_data;
  endtask

  initial begin
    instr_t i;
    logic [7:0] pix [COLS];
    logic [7:0] w [COLS];
    logic [7:0] x [COLS];
    logic [7:0] piv;
    logic [COLS-1:0] d, e, plane;
    int unsigned esum;
    ivalid = 0; ins = '0; pv = 0; px = 0; cyc = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    // broadcast ini of the constant rows, addressed write
    i = '0; i.opcode = OP_INI; i.bcast = 1; i.src1 = ROW_ZERO; i.imm = 0; send(i);
    i = '0; i.opcode = OP_INI; i.bcast = 1; i.src1 = ROW_ONE;  i.imm = 1; send(i);
    i = '0; i.opcode = OP_WRITE; i.sub = 1; i.dest = 8'd140; i.data = {8{32'hCAFEF00D}}; send(i);
    i = '0; i.opcode = OP_WRITE; i.sub = 2; i.dest = 8'd140; i.data = '0; send(i);
    for (int s = 0; s < 4; s++) begin
      read_row(s, ROW_ONE, d); checks++; if (d !== '1) begin failures++; $display("ini bcast sub %0d", s); end
    end
    read_row(1, 8'd140, d); checks++; if (d !== {8{32'hCAFEF00D}}) failures++;
    read_row(2, 8'd140, d); checks++; if (d !== '0) failures++;
    // stream pixels, transposed load into sub 2, pivot rows by ini, LBP
    piv = 8'($urandom);
    for (int c = 0; c < COLS; c++) begin
      pix[c] = ($urandom_range(0, 4) == 0) ? piv : 8'($urandom);
      pv = 1; px = pix[c]; @(posedge clk); #1;
    end
    pv = 0;
    i = '0; i.opcode = OP_LOADT; i.sub = 2; i.dest = P_BASE; i.size = SZ_256; send(i);
    checks++;
    if (iready !== 1'b0) begin failures++; $display("ready during LOADT"); end
    wait_idle();
    checks++;
    if (tb_count != 0) begin failures++; $display("buffer not cleared"); end
    for (int b = 0; b < 8; b++) begin
      for (int c = 0; c < COLS; c++) plane[c] = pix[c][b];
      read_row(2, P_BASE + row_t'(b), d);
      checks++;
      if (d !== plane) begin failures++; $display("plane %0d wrong", b); end
      i = '0; i.opcode = OP_INI; i.sub = 2; i.src1 = C_BASE + row_t'(b); i.imm = 32'(piv[b]); send(i);
    end
    i = '0; i.opcode = OP_LBP; i.sub = 2; i.src1 = P_BASE; i.src2 = C_BASE; i.size = SZ_256; i.data = '1;
    send(i);
    wait_idle();
    for (int c = 0; c < COLS; c++) e[c] = pix[c] > piv;
    read_row(2, ROW_LBP, d);
    checks++;
    if (d !== e) begin failures++; $display("LBP result wrong"); end
    // MLP on sub 1: 3-bit weights and inputs
    for (int c = 0; c < COLS; c++) begin w[c] = 8'($urandom_range(0, 7)); x[c] = 8'($urandom_range(0, 7)); end
    for (int b = 0; b < 3; b++) begin
      for (int c = 0; c < COLS; c++) plane[c] = w[c][b];
      i = '0; i.opcode = OP_WRITE; i.sub = 1; i.dest = W_BASE + row_t'(b); i.data = plane; send(i);
      for (int c = 0; c < COLS; c++) plane[c] = x[c][b];
      i = '0; i.opcode = OP_WRITE; i.sub = 1; i.dest = I_BASE + row_t'(b); i.data = plane; send(i);
    end
    esum = 0;
    for (int c = 0; c < 128; c++) esum += w[c] * x[c];
    i = '0; i.opcode = OP_MLP; i.sub = 1; i.src1 = W_BASE; i.src2 = I_BASE; i.size = SZ_128; i.imm = 32'h33;
    send(i);
    while (!mlp_done) begin @(posedge clk); #1; end
    checks++;
    if (mlp_result !== 24'(esum)) begin failures++; $display("MLP %0d expected %0d", mlp_result, esum); end
    checks++;
    if (cyc - issue_cycle != 9 + 2) begin failures++; $display("MLP cycles %0d", cyc - issue_cycle); end
    // MAP read
    i = '0; i.opcode = OP_MAP; i.sub = 1; i.src1 = 8'd140; i.imm = 32'h1234_0105; send(i);
    while (!map_valid) begin @(posedge clk); #1; end
    checks++;
    if (map_row !== {8{32'hCAFEF00D}} || map_cfg !== 32'h1234_0105) begin failures++; $display("MAP"); end
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
