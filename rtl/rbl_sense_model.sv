// rbl_sense_model: behavioural (not synthesizable) model of one read bit-line
// (RBL) of the compute sub-array and its three sub-sense-amplifiers.
//
// What it models: the RBL is precharged high while `pre` is 1. When `pre`
// falls, the activated 8T cells that hold '0' discharge it. A row that is not
// activated does not discharge it, so it acts like a cell holding '1'. After a
// settling delay the bit-line rests at the level printed in the measured
// waveforms: 280, 495, 735 or 950 mV for 0, 1, 2 or 3 cells holding '1'. On
// the rising edge of `sae` the three sub-SAs compare it against VR1 = 360,
// VR2 = 550 and VR3 = 850 mV. They latch OR3 (at least one '1'), MAJ (at least
// two) and AND3 (all three).
//
// Interface: rwl[2:0] are the three read word lines of the column's activated
// rows and data[2:0] are the values those cells store. v_rbl_mv is the
// bit-line voltage in millivolts. margin_mv is the smallest distance between a
// level and a reference. With the printed numbers that is 55 mV, between the
// one-'1' level (495 mV) and VR2 (550 mV).
//
// Paper vs. this model: the voltage levels, the references and the 1.1 V
// precharge come from the paper. The settling delay (SETTLE time units) is
// chosen here. The synthesizable design uses the
// count of '1' cells (reconfig_sa) in place of this voltage.
module rbl_sense_model #(
  parameter int SETTLE = 1
) (
  input  logic       pre,
  input  logic [2:0] rwl,
  input  logic [2:0] data,
  input  logic       sae,
  output real        v_rbl_mv,
  output logic       or3,
  output logic       maj3,
  output logic       and3,
  output real        margin_mv
);
  localparam real VPRE = 1100.0;
  localparam real VR1 = 360.0, VR2 = 550.0, VR3 = 850.0;
  real lvl [4];
  int  ones;

  function automatic real gap_mv(real a, real b);
    return (a > b) ? a - b : b - a;
  endfunction

  initial begin
    lvl[0] = 280.0; lvl[1] = 495.0; lvl[2] = 735.0; lvl[3] = 950.0;
    v_rbl_mv = VPRE;
    or3 = 1'b0; maj3 = 1'b0; and3 = 1'b0;
    margin_mv = 1000.0;
    for (int k = 0; k < 4; k++) begin
      if (gap_mv(lvl[k], VR1) < margin_mv) margin_mv = gap_mv(lvl[k], VR1);
      if (gap_mv(lvl[k], VR2) < margin_mv) margin_mv = gap_mv(lvl[k], VR2);
      if (gap_mv(lvl[k], VR3) < margin_mv) margin_mv = gap_mv(lvl[k], VR3);
    end
  end

  always @(pre or rwl or data) begin
    ones = 0;
    for (int k = 0; k < 3; k++) if (!rwl[k] || data[k]) ones++;
    if (pre) v_rbl_mv = VPRE;
    else v_rbl_mv = #SETTLE lvl[ones];
  end

  always @(posedge sae) begin
    or3  <= (v_rbl_mv > VR1);
    maj3 <= (v_rbl_mv > VR2);
    and3 <= (v_rbl_mv > VR3);
  end
endmodule
