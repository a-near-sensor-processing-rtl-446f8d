// tb_ns_lbp_top: end-to-end run of the NS-LBP slice at its default size
// (80 banks, 320 sub-arrays).
//
// Workload: one Ap-LBP layer on an 8x8 image (zero padded by one pixel) with
// two LBP kernels (channels A and B, four sampling points each, placed as in
// the published example), partial approximate computing with one approximated
// bit, channel fusion by the projection map B,A,B,A, shifted ReLU and
// quantisation to 3 bits in the DPU, then one MLP neuron over the 64 quantised
// activations with random 3-bit weights. Sub-arrays 0 and 1 hold 32 output
// pixels each: column p*8 + c*4 + k holds sampling point k of channel c of
// output pixel p, with its pivot in the same column of the C-region. Both
// rows are streamed through the transpose buffer and loaded with LOADT.
// Every ISA instruction is also exercised on the last sub-array of the slice.
// Each mechanism is counted and must occur at least once.
module tb_ns_lbp_top;
  import nslbp_pkg::*;
  localparam int NB = 80;
  localparam int NSUBS = NB * 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pv, ivalid, iready, busy, rd_valid, mlp_done, lbp_done, map_valid, dpu_valid;
  logic [7:0] px;
  instr_t ins;
  logic [COLS-1:0] rd_data;
  logic [23:0] mlp_result, dpu_y;
  logic [3:0] map_pix;
  logic [2:0] dpu_q;
  logic bn_en, act_en;
  logic signed [7:0] scale;
  logic signed [15:0] bias;
  logic [3:0] frac;
  logic [23:0] relu_shift;
  logic [4:0] qshift;

  ns_lbp_top dut (
    .clk(clk), .rst_n(rst_n), .pix_valid(pv), .pix_data(px), .instr_valid(ivalid), .instr(ins),
    .instr_ready(iready), .busy(busy), .rd_valid(rd_valid), .rd_data(rd_data),
    .mlp_done(mlp_done), .mlp_result(mlp_result), .lbp_done(lbp_done), .map_valid(map_valid),
    .map_pix(map_pix), .dpu_bn_en(bn_en), .dpu_scale(scale), .dpu_bias(bias), .dpu_frac(frac),
    .dpu_act_en(act_en), .dpu_relu_shift(relu_shift), .dpu_qshift(qshift),
    .dpu_valid(dpu_valid), .dpu_y(dpu_y), .dpu_q(dpu_q));

  int cyc = 0, issue_cycle;
  always @(posedge clk) cyc++;

  // mechanism counters
  int n_bcast, n_loadt, n_lbp_runs, n_lbp_parallel, n_lbp_early, n_skip_cols, n_map_apx;
  int n_mlp, n_relu_clip, n_quant_sat, n_isa [16];

  task automatic send(instr_t i);
    ins = i; ivalid = 1;
    while (!iready) begin @(posedge clk); #1; end
    @(posedge clk);
    issue_cycle = cyc;
    #1; ivalid = 0; ins = '0;
    if (i.bcast) n_bcast++;
    n_isa[i.opcode]++;
  endtask
  task automatic wait_idle();
    while (busy) begin @(posedge clk); #1; end
  endtask
  task automatic read_row(int s, row_t r, output logic [COLS-1:0] d);
    instr_t i;
    i = '0; i.opcode = OP_READ; i.sub = SUB_AW'(s); i.src1 = r;
    send(i);
    while (!rd_valid) begin @(posedge clk); #1; end
    d = rd_data;
  endtask
  task automatic stream(logic [7:0] v [COLS]);
    for (int c = 0; c < COLS; c++) begin pv = 1; px = v[c]; @(posedge clk); #1; end
    pv = 0;
  endtask
  function automatic logic [COLS-1:0] rnd_row();
    logic [COLS-1:0] v;
    for (int k = 0; k < COLS / 32; k++) v[k*32 +: 32] = $urandom;
    return v;
  endfunction

  // kernel sampling offsets (dy, dx) for element k = 0..3 of channels A and B
  int kdy [2][4] = '{'{-1, 0, -1, 0}, '{0, 1, -1, -1}};
  int kdx [2][4] = '{'{1, 1, -1, -1}, '{1, 0, -1, 0}};
  logic [7:0] img [10][10];   // padded image, interior 1..8

  initial begin
    instr_t i;
    logic [7:0] nb [COLS];
    logic [7:0] pvv [COLS];
    logic [COLS-1:0] d, e, en;
    logic [3:0] e_pix [64];
    logic [2:0] e_q [64];
    logic [2:0] got_q [64];
    logic [7:0] w [COLS];
    int unsigned esum;
    int t0, apx, ndone;
    logic [3:0] mapt;
    pv = 0; px = 0; ivalid = 0; ins = '0;
    bn_en = 0; act_en = 1; scale = 1; bias = 0; frac = 0; relu_shift = 2; qshift = 1;
    foreach (n_isa[k]) n_isa[k] = 0;
    {n_bcast, n_loadt, n_lbp_runs, n_lbp_parallel, n_lbp_early, n_skip_cols, n_map_apx} = '0;
    {n_mlp, n_relu_clip, n_quant_sat} = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // constant rows everywhere
    i = '0; i.opcode = OP_INI; i.bcast = 1; i.src1 = ROW_ZERO; i.imm = 0; send(i);
    i = '0; i.opcode = OP_INI; i.bcast = 1; i.src1 = ROW_ONE;  i.imm = 1; send(i);

    // ---------------- image, zero padding
    for (int y = 0; y < 10; y++)
      for (int x = 0; x < 10; x++)
        img[y][x] = (y == 0 || x == 0 || y == 9 || x == 9) ? 8'd0 :
                    (($urandom_range(0, 5) == 0) ? img[y][x-1] : 8'($urandom));

    // ---------------- LBP layer on sub-arrays 0 and 1
    apx = 1;
    en = '0;
    for (int col = 0; col < COLS; col++) en[col] = ((col % 4) >= apx);
    for (int s = 0; s < 2; s++) begin
      for (int p = 0; p < 32; p++)
        for (int c = 0; c < 2; c++)
          for (int k = 0; k < 4; k++) begin
            int op_pix, y, x;
            op_pix = s * 32 + p; y = op_pix / 8 + 1; x = op_pix % 8 + 1;
            nb[p*8 + c*4 + k]  = img[y + kdy[c][k]][x + kdx[c][k]];
            pvv[p*8 + c*4 + k] = img[y][x];
          end
      stream(nb);
      i = '0; i.opcode = OP_LOADT; i.sub = SUB_AW'(s); i.dest = P_BASE; send(i); n_loadt++;
      wait_idle();
      stream(pvv);
      i = '0; i.opcode = OP_LOADT; i.sub = SUB_AW'(s); i.dest = C_BASE; send(i); n_loadt++;
      wait_idle();
    end
    // run both sub-arrays at once: broadcast LBP (all sub-arrays run, 0 and 1 hold data)
    i = '0; i.opcode = OP_LBP; i.bcast = 1; i.src1 = P_BASE; i.src2 = C_BASE; i.data = en;
    send(i);
    t0 = cyc;
    ndone = 0;
    while (busy) begin @(posedge clk); #1; if (lbp_done) ndone++; end
    n_lbp_runs++;
    if (ndone > 0) n_lbp_parallel++;
    n_skip_cols += COLS - $countones(en);
    checks++;
    if (cyc - t0 > 2 * PIX_W + 3) begin failures++; $display("LBP took %0d cycles", cyc - t0); end
    // LBP outputs, and the fused pixels through MAP + DPU
    mapt = 4'b1010;  // bit k: channel of output bit k (B,A,B,A from bit 3)
    for (int s = 0; s < 2; s++) begin
      read_row(s, ROW_LBP, d);
      for (int col = 0; col < COLS; col++) e[col] = en[col] && (nb[col] > pvv[col]);
      // recompute the reference for sub-array s
      for (int p = 0; p < 32; p++)
        for (int c = 0; c < 2; c++)
          for (int k = 0; k < 4; k++) begin
            int op_pix, y, x;
            op_pix = s * 32 + p; y = op_pix / 8 + 1; x = op_pix % 8 + 1;
            e[p*8 + c*4 + k] = (k >= apx) && (img[y + kdy[c][k]][x + kdx[c][k]] > img[y][x]);
          end
      checks++;
      if (d !== e) begin failures++; $display("LBP row of sub-array %0d wrong", s); end
      for (int p = 0; p < 32; p++) begin
        int op_pix, a;
        op_pix = s * 32 + p;
        e_pix[op_pix] = '0;
        for (int k = apx; k < 4; k++) e_pix[op_pix][k] = e[p*8 + 4*mapt[k] + k];
        a = int'(e_pix[op_pix]) - int'(relu_shift);
        if (a < 0) a = 0;
        a = a >> qshift;
        e_q[op_pix] = (a > 7) ? 3'd7 : 3'(a);
        i = '0; i.opcode = OP_MAP; i.sub = SUB_AW'(s); i.src1 = ROW_LBP;
        i.imm = {8'(p * 8), 13'd0, 3'(apx), 4'd0, mapt};
        send(i);
        while (!map_valid) begin @(posedge clk); #1; end
        checks++;
        if (map_pix !== e_pix[op_pix]) begin failures++; $display("pixel %0d mapped %0d exp %0d", op_pix, map_pix, e_pix[op_pix]); end
        if (apx > 0) n_map_apx++;
        while (!dpu_valid) begin @(posedge clk); #1; end
        got_q[op_pix] = dpu_q;
        checks++;
        if (dpu_q !== e_q[op_pix]) begin failures++; $display("pixel %0d q %0d exp %0d", op_pix, dpu_q, e_q[op_pix]); end
        if (e_pix[op_pix] > 0 && dpu_y == 0) n_relu_clip++;
      end
    end

    // ---------------- MLP neuron over the 64 activations on sub-array 5
    for (int c = 0; c < COLS; c++) begin
      w[c] = 8'($urandom_range(0, 7));
      nb[c] = (c < 64) ? 8'(got_q[c]) : 8'd0;
    end
    for (int b = 0; b < 3; b++) begin
      for (int c = 0; c < COLS; c++) begin d[c] = w[c][b]; e[c] = nb[c][b]; end
      i = '0; i.opcode = OP_WRITE; i.sub = 5; i.dest = W_BASE + row_t'(b); i.data = d; send(i);
      i = '0; i.opcode = OP_WRITE; i.sub = 5; i.dest = I_BASE + row_t'(b); i.data = e; send(i);
    end
    esum = 0;
    for (int c = 0; c < 64; c++) esum += w[c] * nb[c];
    bn_en = 1; scale = 8'sd3; bias = -16'sd40; frac = 2; act_en = 1; relu_shift = 0; qshift = 0;
    i = '0; i.opcode = OP_MLP; i.sub = 5; i.src1 = W_BASE; i.src2 = I_BASE; i.size = SZ_64; i.imm = 32'h33;
    send(i);
    while (!mlp_done) begin @(posedge clk); #1; end
    n_mlp++;
    checks++;
    if (mlp_result !== 24'(esum)) begin failures++; $display("MLP %0d exp %0d", mlp_result, esum); end
    checks++;
    if (cyc - issue_cycle != 3 * 3 + 2) begin failures++; $display("MLP cycles %0d", cyc - issue_cycle); end
    while (!dpu_valid) begin @(posedge clk); #1; end
    begin
      longint bnv, ey;
      bnv = (longint'(esum) * 3 - 40) >>> 2;
      ey = (bnv < 0) ? 0 : bnv;
      checks++;
      if (dpu_y !== 24'(ey) || dpu_q !== ((ey > 7) ? 3'd7 : 3'(ey))) begin failures++; $display("DPU after MLP y=%0d exp %0d", dpu_y, ey); end
      if (ey > 7) n_quant_sat++;
    end

    // ---------------- every ISA instruction on the last sub-array
    begin
      logic [COLS-1:0] ra, rb, rc, m, ex;
      int s;
      s = NSUBS - 1;
      ra = rnd_row(); rb = rnd_row(); rc = rnd_row();
      i = '0; i.opcode = OP_WRITE; i.sub = SUB_AW'(s); i.dest = 8'd10; i.data = ra; send(i);
      i = '0; i.opcode = OP_WRITE; i.sub = SUB_AW'(s); i.dest = 8'd11; i.data = rb; send(i);
      i = '0; i.opcode = OP_WRITE; i.sub = SUB_AW'(s); i.dest = 8'd12; i.data = rc; send(i);
      for (int k = 3; k <= 11; k++) begin
        i = '0; i.opcode = opcode_e'(k); i.sub = SUB_AW'(s); i.src1 = 8'd10; i.src2 = 8'd11;
        i.src3 = 8'd12; i.dest = 8'd20; i.size = (k == 5) ? SZ_128 : SZ_256; i.imm = 1;
        if (k == OP_INI) i.src1 = 8'd20;
        // keep the destination's previous value for the size-limited case
        read_row(s, 8'd20, m);
        send(i);
        case (opcode_e'(k))
          OP_COPY:   ex = ra;
          OP_INI:    ex = '1;
          OP_CMP:    ex = (ra ^ rb) & size_mask(SZ_128) | (m & ~size_mask(SZ_128));
          OP_SEARCH: ex = ~(ra ^ rb);
          OP_NAND3:  ex = ~(ra & rb & rc);
          OP_NOR3:   ex = ~(ra | rb | rc);
          OP_MAJ3:   ex = (ra & rb) | (ra & rc) | (rb & rc);
          OP_XOR3:   ex = ra ^ rb ^ rc;
          default:   ex = ra & rb;
        endcase
        read_row(s, 8'd20, d);
        checks++;
        if (d !== ex) begin failures++; $display("ISA opcode %0d wrong", k); end
      end
    end

    // ---------------- the early-stop case: every column differs at the MSB
    for (int c = 0; c < COLS; c++) begin nb[c] = 8'h80 | 8'($urandom); pvv[c] = 8'h00 | 8'($urandom_range(0, 127)); end
    stream(nb);
    i = '0; i.opcode = OP_LOADT; i.sub = 2; i.dest = P_BASE; send(i); n_loadt++;
    wait_idle();
    stream(pvv);
    i = '0; i.opcode = OP_LOADT; i.sub = 2; i.dest = C_BASE; send(i); n_loadt++;
    wait_idle();
    i = '0; i.opcode = OP_LBP; i.sub = 2; i.src1 = P_BASE; i.src2 = C_BASE; i.data = '1; send(i);
    t0 = cyc;
    wait_idle();
    n_lbp_runs++;
    checks++;
    if (cyc - t0 > 5) begin failures++; $display("early stop took %0d cycles", cyc - t0); end
    else n_lbp_early++;
    read_row(2, ROW_LBP, d);
    checks++;
    if (d !== '1) begin failures++; $display("early-stop LBP row wrong"); end

    // ---------------- mechanism coverage
    begin
      int cov [string];
      cov["broadcast"] = n_bcast; cov["transposed_load"] = n_loadt; cov["lbp_run"] = n_lbp_runs;
      cov["lbp_parallel_subarrays"] = n_lbp_parallel; cov["lbp_early_stop"] = n_lbp_early;
      cov["pac_skip_comparison"] = n_skip_cols; cov["pac_skip_mapping_bits"] = n_map_apx;
      cov["mlp"] = n_mlp; cov["shifted_relu_clip"] = n_relu_clip; cov["quant_saturate"] = n_quant_sat;
      for (int k = 1; k <= 15; k++) cov[$sformatf("opcode_%0d", k)] = n_isa[k];
      foreach (cov[name]) begin
        $display("mechanism %-24s %0d", name, cov[name]);
        checks++;
        if (cov[name] == 0) begin failures++; $display("mechanism %s never happened", name); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
