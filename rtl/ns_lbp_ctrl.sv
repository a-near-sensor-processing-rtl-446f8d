// ns_lbp_ctrl: central control unit (Ctrl) of the NS-LBP slice.
//
// It accepts one instruction at a time (instr_valid/instr_ready handshake; an
// instruction is taken in a cycle where both are high) and
//   - decodes ISA instructions (command_decoder) into one micro-operation that
//     goes in the same cycle to sub-array `sub`, or to every sub-array when
//     bcast is set; READ returns the sensed row on rd_data two cycles after
//     acceptance (issue, then the registered sense-amp output);
//   - LOADT: writes the PIX_W bit planes of the transpose buffer into rows
//     dest .. dest+PIX_W-1 (one plane per cycle), then clears the buffer;
//   - LBP: starts the local LBP controllers of the selected sub-arrays with
//     P-base src1, C-base src2, column enables `data`, and waits until all
//     of them are idle;
//   - MLP: runs the dot-product engine (mlp_unit) on sub-array `sub` with
//     W-base src1, I-base src2, weight bits imm[3:0], input bits imm[7:4];
//     mlp_done/mlp_result report the sum;
//   - MAP: reads row src1 of sub-array `sub` and presents it on map_row with
//     map_valid for one cycle, together with imm (map_cfg) for the PAC mapper.
// instr_ready is high only while the controller is idle. The instruction
// format and this sequencing are this design's choices.
// Lint note: the decoder's `macro` flag is left unused because the state
// machine decodes the macro opcodes itself.
module ns_lbp_ctrl
  import nslbp_pkg::*;
#(
  parameter int NSUB  = 320,
  parameter int ACC_W = 24
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                instr_valid,
  input  instr_t              instr,
  output logic                instr_ready,
  output subarray_op_t        op,
  output logic [NSUB-1:0]     op_sel,
  output logic [NSUB-1:0]     lbp_start,
  output row_t                p_base,
  output row_t                c_base,
  output logic [COLS-1:0]     cmp_en,
  output size_e               lbp_size,
  input  logic [NSUB-1:0]     lbp_busy,
  output logic [SUB_AW-1:0]   rd_sub,
  input  logic [COLS-1:0]     rdata_in,
  output logic [$clog2(PIX_W)-1:0] tb_plane,
  input  logic [COLS-1:0]     tb_data,
  output logic                tb_clear,
  output logic                rd_valid,
  output logic [COLS-1:0]     rd_data,
  output logic                mlp_done,
  output logic [ACC_W-1:0]    mlp_result,
  output logic                map_valid,
  output logic [COLS-1:0]     map_row,
  output logic [31:0]         map_cfg,
  output logic                busy
);
  typedef enum logic [2:0] {S_IDLE, S_LOADT, S_LBP, S_MLP, S_RD, S_MAP} state_e;
  state_e state;

  subarray_op_t dec_op, mlp_op;
  logic         dec_macro, dec_read;
  command_decoder u_dec (.instr(instr), .valid(instr_valid), .op(dec_op),
                         .macro(dec_macro), .is_read(dec_read));

  logic [NSUB-1:0] sel_q, sel_now;
  row_t            dest_q;
  size_e           size_q;
  logic [$clog2(PIX_W)-1:0] plane_q;
  logic            mlp_start, mlp_busy;
  logic            accept;

  always_comb begin
    sel_now = '0;
    if (instr.bcast) sel_now = '1;
    else if (int'(instr.sub) < NSUB) sel_now[instr.sub] = 1'b1;
    instr_ready = (state == S_IDLE);
    accept      = instr_valid & instr_ready;
    busy        = (state != S_IDLE);
  end

  mlp_unit #(.ACC_W(ACC_W)) u_mlp (
    .clk(clk), .rst_n(rst_n), .start(mlp_start), .w_base(instr.src1), .i_base(instr.src2),
    .wbits(instr.imm[3:0]), .ibits(instr.imm[7:4]), .size(instr.size), .op(mlp_op),
    .array_out(rdata_in), .busy(mlp_busy), .done(mlp_done), .result(mlp_result)
  );

  always_comb begin
    op        = '0;
    op_sel    = '0;
    lbp_start = '0;
    mlp_start = 1'b0;
    tb_clear  = 1'b0;
    p_base    = instr.src1;
    c_base    = instr.src2;
    cmp_en    = instr.data;
    lbp_size  = instr.size;
    tb_plane  = plane_q;
    unique case (state)
      S_IDLE: if (accept) begin
        unique case (instr.opcode)
          OP_LBP: lbp_start = sel_now;
          OP_MLP: mlp_start = 1'b1;
          OP_MAP: begin
            op       = '0;
            op.valid = 1'b1; op.ren = 3'b001; op.ra = instr.src1; op.sel = SA_AND3;
            op.size  = instr.size;
            op_sel   = sel_now;
          end
          OP_LOADT: ;
          default: begin
            op     = dec_op;
            op_sel = sel_now;
          end
        endcase
      end
      S_LOADT: begin
        op.valid = 1'b1;
        op.wen   = 1'b1;
        op.wa    = dest_q + row_t'(plane_q);
        op.wsrc  = WSRC_DATA;
        op.wdata = tb_data;
        op.size  = size_q;
        op_sel   = sel_q;
        tb_clear = (plane_q == $clog2(PIX_W)'(PIX_W - 1));
      end
      S_MLP: begin
        op     = mlp_op;
        op_sel = sel_q;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      sel_q     <= '0;
      dest_q    <= '0;
      size_q    <= SZ_256;
      plane_q   <= '0;
      rd_sub    <= '0;
      rd_valid  <= 1'b0;
      rd_data   <= '0;
      map_valid <= 1'b0;
      map_row   <= '0;
      map_cfg   <= '0;
    end else begin
      rd_valid  <= 1'b0;
      map_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (accept) begin
          sel_q  <= sel_now;
          dest_q <= instr.dest;
          size_q <= instr.size;
          rd_sub <= instr.sub;
          unique case (instr.opcode)
            OP_LOADT: begin state <= S_LOADT; plane_q <= '0; end
            OP_LBP:   state <= S_LBP;
            OP_MLP:   state <= S_MLP;
            OP_MAP:   begin state <= S_MAP; map_cfg <= instr.imm; end
            default:  if (dec_read) state <= S_RD;
          endcase
        end
        S_LOADT: begin
          plane_q <= plane_q + 1'b1;
          if (plane_q == $clog2(PIX_W)'(PIX_W - 1)) state <= S_IDLE;
        end
        S_LBP: if ((lbp_busy & sel_q) == '0) state <= S_IDLE;
        S_MLP: if (mlp_done) state <= S_IDLE;
        S_RD: begin
          rd_valid <= 1'b1;
          rd_data  <= rdata_in;
          state    <= S_IDLE;
        end
        S_MAP: begin
          map_valid <= 1'b1;
          map_row   <= rdata_in;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The MLP engine must be idle whenever the controller is idle.
  a_mlp_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               (state == S_IDLE) |-> !mlp_busy);
endmodule
