// cap_maj3: in-sense-amplifier capacitive majority unit.
//
// Each column's sense amplifier has three sub-SAs whose outputs are OR3, MIN
// (the inverted majority) and AND3 of the three activated cells. Three equal
// capacitors couple these outputs onto one node, which settles at n*VDD/3 for n
// inputs high; an inverter pair restores it to a full logic level. The result is
// MAJ(OR3, MIN, AND3), which equals XOR3 of the three cells. This module keeps
// only the logic function (a 3-input majority); the capacitor divider is analog.
// Purely combinational.
module cap_maj3 (
  input  logic or3,
  input  logic min3,
  input  logic and3,
  output logic xor3
);
  always_comb xor3 = (or3 & min3) | (or3 & and3) | (min3 & and3);
endmodule
