// reconfig_sa: the row of reconfigurable sense amplifiers under a compute sub-array.
//
// When three read word lines are raised together, the precharged read bit-line
// (RBL) of each column discharges through every activated cell holding '0'. The
// RBL voltage therefore encodes how many of the three cells hold '1'. Here that
// voltage is represented by `level` (0..3 cells at '1'), and the three sub-SAs
// compare it against references R1 < R2 < R3:
//   sub-SA1 (R1): level >= 1  -> OR3   (Outbar: NOR3)
//   sub-SA2 (R2): level >= 2  -> MAJ3  (Outbar: MIN)
//   sub-SA3 (R3): level == 3  -> AND3  (Outbar: NAND3)
// The capacitive majority of OR3, MIN and AND3 gives XOR3 (cap_maj3). The Out_S
// mux picks one result per column onto array_out; `inv` takes the complement,
// which gives the N-forms of the published ISA. A normal one-row read leaves the
// other two word lines low; they do not discharge the RBL, so the cell is sensed
// by sub-SA3 (level 3 for '1', level 2 for '0').
// The thresholds follow the published transient results (RBL 280/495/735/950 mV
// for 0..3 ones, references 360/550/850 mV). Routing the MAJ output to the mux
// input drawn as "Mem" and the Out_S encoding are this design's choices.
// Combinational; outputs are forced low while sae is low.
module reconfig_sa
  import nslbp_pkg::*;
#(
  parameter int NCOL = COLS
) (
  input  logic [NCOL-1:0][1:0] level,
  input  logic                 sae,
  input  sa_sel_e              out_s,
  input  logic                 inv,
  output logic [NCOL-1:0]      array_out
);
  for (genvar c = 0; c < NCOL; c++) begin : g_col
    logic or3, maj3, min3, and3, xor3, sel;
    always_comb begin
      or3  = (level[c] != 2'd0);
      maj3 = level[c][1];
      min3 = ~maj3;
      and3 = (level[c] == 2'd3);
    end
    cap_maj3 u_cmaj (.or3(or3), .min3(min3), .and3(and3), .xor3(xor3));
    always_comb begin
      unique case (out_s)
        SA_OR3:  sel = or3;
        SA_XOR3: sel = xor3;
        SA_MAJ:  sel = maj3;
        default: sel = and3;
      endcase
      array_out[c] = sae & (sel ^ inv);
    end
  end
endmodule
