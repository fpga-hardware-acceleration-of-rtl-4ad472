// boltzmann_lut: the lookup table of exp(-beta*dE) inside one spin block.
//
// The table has five 12-bit entries, one per value of the local energy
// eps = -4,-2,0,2,4 (dE = 2*eps), as the paper describes. The paper fills the
// table in configurable logic for a fixed temperature; here the five words
// come in on the table port, so one shared temperature register of the top
// level sets them for all spin blocks. The entry selected by eps_idx is
// registered on Clk_B, the clock of twice the system frequency, so that the
// read completes in the first half of a Clk_A cycle and the comparison with
// the random number fits in the second half, as in the paper.
//
// Interface: eps_idx = (eps+4)/2, value = registered entry.
// Timing: value follows eps_idx one Clk_B edge later.
module boltzmann_lut
  import ising_pkg::*;
(
  input  logic         clk_b,
  input  boltz_table_t table_i,
  input  eps_idx_t     eps_idx,
  output boltz_t       value
);
  always_ff @(posedge clk_b)
    value <= (eps_idx < eps_idx_t'(LUT_N)) ? table_i[eps_idx] : '0;
endmodule
