// spin_array: P spin blocks updated in parallel, one memory word per cycle.
//
// The paper sizes the number of spin blocks by the LUTs of the device:
// Max_Spin <= 69120/30, rounded down to a power of two, gives P = 2048. The
// array takes the word of spins being updated, the neighbour word of the
// other sub-lattice and the two halo rows, routes them through neighbor_map
// to the P spin blocks and returns the P New_Spin registers as new_word.
// All blocks share the global LFSR32 bits and the Boltzmann table; each has
// its own LFSR12 whose seed is ising_pkg::lfsr12_seed(index).
//
// Interface: upd_word bit i is the current value of spin block i; new_word
// bit i its registered result; flip is the S_Change vector of the cycle,
// rnd_bit the top bit of every block's random number (used by the controller
// to write a random initial lattice).
// Timing: one word per Clk_A cycle while en is high; new_word is valid the
// cycle after the word was presented.
module spin_array
  import ising_pkg::*;
#(
  parameter int unsigned L = 1024,
  parameter int unsigned P = 2048
) (
  input  logic         clk_a,
  input  logic         clk_b,
  input  logic         rst_n,
  input  logic         en,
  input  logic [P-1:0] upd_word,
  input  logic [P-1:0] nbr_word,
  input  logic [L/2-1:0] halo_top,
  input  logic [L/2-1:0] halo_bot,
  input  logic         row_par,
  input  logic [11:0]  lfsr32_bits,
  input  boltz_table_t table_i,
  output logic [P-1:0] new_word,
  output logic [P-1:0] flip,
  output logic [P-1:0] rnd_bit
);
  logic [P-1:0] nl, nt, nr, nb;

  neighbor_map #(.L(L), .P(P)) u_map (
    .nbr_word, .halo_top, .halo_bot, .row_par, .nl, .nt, .nr, .nb
  );

  for (genvar i = 0; i < P; i++) begin : g_spin
    logic [11:0] rnd;
    spin_unit #(.SEED(lfsr12_seed(i))) u_spin (
      .clk_a, .clk_b, .rst_n, .en,
      .spin(upd_word[i]), .nl(nl[i]), .nt(nt[i]), .nr(nr[i]), .nb(nb[i]),
      .lfsr32_bits, .table_i,
      .new_spin(new_word[i]), .s_change(flip[i]), .rnd
    );
    assign rnd_bit[i] = rnd[11];
  end
endmodule
