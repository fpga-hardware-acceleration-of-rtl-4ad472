// spin_unit: Metropolis update of one Ising spin per Clk_A cycle.
//
// This is the spin block of the paper's Fig. 1. The stored Boolean spin
// values (1 = +1, 0 = -1) of the four nearest neighbours L, T, R, B are
// mapped to +1/-1 and summed (range -4..4). The local energy
// eps = S0*(S_L+S_T+S_R+S_B) is the sum when the spin is 1 and its negation
// when it is 0 (a 2:1 multiplexer, as in the figure). Two comparisons decide
// a flip:
//   S_Com1 = eps <= 0, the flip does not raise the energy (dE = 2*eps <= 0);
//   S_Com2 = r < exp(-beta*dE), the Metropolis acceptance of Eq. 2, with
//            exp(-beta*dE) read from the Boltzmann lookup table on Clk_B.
// S_Change = S_Com1 | S_Com2 is XORed with the spin and registered on Clk_A
// as New_Spin. The random number r is the XOR of the block's own LFSR12 and
// the 12 low bits of the global LFSR32.
//
// The figure prints ">=" on the second comparator while the text writes
// r < exp(-beta*dE); this block follows the text (strict), so that a table
// entry v accepts with probability exactly v/4096.
//
// Interface: spin/nl/nt/nr/nb are the current spin and its neighbours,
// lfsr32_bits the global random bits, table_i the five Boltzmann words.
// new_spin is registered; s_change (combinational, valid once the table has
// been read on the mid-cycle Clk_B edge) and rnd are exposed for the
// magnetization counter and for random initialisation of the lattice.
// Timing: inputs must be stable from the Clk_A edge; the table is read on the
// Clk_B edge in the middle of the cycle and new_spin is captured on the next
// Clk_A edge when en is high. The local LFSR shifts on every enabled cycle.
module spin_unit
  import ising_pkg::*;
#(
  parameter logic [11:0] SEED = 12'h001
) (
  input  logic         clk_a,
  input  logic         clk_b,
  input  logic         rst_n,
  input  logic         en,
  input  logic         spin,
  input  logic         nl,
  input  logic         nt,
  input  logic         nr,
  input  logic         nb,
  input  logic [11:0]  lfsr32_bits,
  input  boltz_table_t table_i,
  output logic         new_spin,
  output logic         s_change,
  output logic [11:0]  rnd
);
  logic [11:0]       lfsr_q;
  logic signed [3:0] sum, eps;
  boltz_t            boltz;
  logic              s_com1, s_com2;

  function automatic logic signed [3:0] pm1(input logic b);
    return b ? 4'sd1 : -4'sd1;
  endfunction

  lfsr12 #(.SEED(SEED)) u_lfsr12 (
    .clk(clk_a), .rst_n, .en, .q(lfsr_q)
  );

  assign rnd = lfsr_q ^ lfsr32_bits;

  always_comb begin
    sum = pm1(nl) + pm1(nt) + pm1(nr) + pm1(nb);
    eps = spin ? sum : -sum;
  end

  boltzmann_lut u_lut (
    .clk_b,
    .table_i,
    .eps_idx(eps_idx_t'(4'(eps + 4'sd4) >> 1)),
    .value  (boltz)
  );

  assign s_com1   = (eps <= 4'sd0);
  assign s_com2   = (rnd < boltz);
  assign s_change = s_com1 | s_com2;

  always_ff @(posedge clk_a or negedge rst_n) begin
    if (!rst_n)  new_spin <= 1'b0;
    else if (en) new_spin <= spin ^ s_change;
  end
endmodule
