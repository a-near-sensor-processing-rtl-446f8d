// tb_compute_subarray: fills a sub-array with random rows through its write
// port, then runs random three-row logic operations, one-row reads and size-
// limited writes, and compares array_out (one cycle after the op) and the
// written rows with a reference model of the array.
module tb_compute_subarray;
  import nslbp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  subarray_op_t op;
  logic [COLS-1:0] aout;
  logic ovalid;
  logic [COLS-1:0] model [ROWS];
  always #5 clk = ~clk;
  compute_subarray dut (.clk(clk), .rst_n(rst_n), .op(op), .array_out(aout), .out_valid(ovalid));

  function automatic logic [COLS-1:0] rnd_row();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic do_op(subarray_op_t o, output logic [COLS-1:0] res);
    op = o;
    @(posedge clk);
    #1;
    res = aout;
    op = '0;
  endtask

  function automatic logic [COLS-1:0] expect_sa(subarray_op_t o);
    logic [COLS-1:0] a, b, c, r;
    logic ea, eb, ec;
    ea = o.ren[0];
    eb = o.ren[1] && !(o.ren[0] && o.rb == o.ra);
    ec = o.ren[2] && !(o.ren[0] && o.rc == o.ra) && !(o.ren[1] && o.rc == o.rb);
    a = ea ? model[o.ra] : '1;
    b = eb ? model[o.rb] : '1;
    c = ec ? model[o.rc] : '1;
    case (o.sel)
      SA_OR3:  r = a | b | c;
      SA_XOR3: r = a ^ b ^ c;
      SA_MAJ:  r = (a & b) | (a & c) | (b & c);
      default: r = a & b & c;
    endcase
    return o.inv ? ~r : r;
  endfunction

  initial begin
    subarray_op_t o;
    logic [COLS-1:0] res, e, m;
    op = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    // fill
    for (int r = 0; r < ROWS; r++) begin
      o = '0; o.valid = 1; o.wen = 1; o.wa = row_t'(r); o.wsrc = WSRC_DATA; o.size = SZ_256;
      o.wdata = rnd_row();
      model[r] = o.wdata;
      do_op(o, res);
    end
    // random operations
    for (int t = 0; t < 3000; t++) begin
      o = '0;
      o.valid = 1;
      o.ren = ($urandom_range(0, 3) == 0) ? 3'b001 : 3'b111;
      o.ra = 8'($urandom); o.rb = 8'($urandom); o.rc = (t % 7 == 0) ? o.ra : 8'($urandom);
      o.sel = sa_sel_e'($urandom_range(0, 3));
      o.inv = 1'($urandom);
      o.wen = 1'($urandom);
      o.wa = 8'($urandom);
      o.wsrc = wsrc_e'($urandom_range(0, 1));
      o.wdata = rnd_row();
      o.size = size_e'($urandom_range(0, 2));
      e = expect_sa(o);
      do_op(o, res);
      checks++;
      if (res !== e) begin
        failures++;
        if (failures < 10) $display("t=%0d array_out mismatch sel=%0d ren=%b", t, o.sel, o.ren);
      end
      if (o.wen) begin
        m = size_mask(o.size);
        model[o.wa] = (model[o.wa] & ~m) | ((o.wsrc == WSRC_DATA ? o.wdata : e) & m);
      end
    end
    // final read-back of every row with one-row reads
    for (int r = 0; r < ROWS; r++) begin
      o = '0; o.valid = 1; o.ren = 3'b001; o.ra = row_t'(r); o.sel = SA_AND3;
      do_op(o, res);
      checks++;
      if (res !== model[r]) begin
        failures++;
        if (failures < 20) $display("row %0d read-back mismatch", r);
      end
    end
    // latency: out_valid follows a sensing op by exactly one cycle
    @(posedge clk); #1;
    o = '0; o.valid = 1; o.ren = 3'b111; o.sel = SA_OR3;
    op = o;
    #1;
    checks++;
    if (ovalid !== 1'b0) failures++;
    @(posedge clk); #1; op = '0;
    checks++;
    if (ovalid !== 1'b1) failures++;
    @(posedge clk); #1;
    checks++;
    if (ovalid !== 1'b0) failures++;
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
