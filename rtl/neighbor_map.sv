// neighbor_map: connectivity from the spin words to the neighbour inputs of
// every spin block (the paper's Fig. 4).
//
// The L x L lattice is split into two checkerboard sub-lattices, kept in two
// memories. One memory word holds ROWS = 2*P/L consecutive lattice rows of
// one sub-lattice, L/2 spins per row, P spins in all: bit r*(L/2)+j is the
// j-th spin of that sub-lattice in row r of the group. While the P spins of a
// word are updated, their four neighbours all belong to the other
// sub-lattice: the same rows (nbr_word, the paper's second register), the
// last row of the group above (halo_top) and the first row of the group below
// (halo_bot), the two halves of the paper's third register. Boundaries are
// periodic, in both directions.
//
// A spin in lattice row y and sub-lattice s sits at column x = 2j + p, with
// p = (y+s) mod 2. Its left neighbour is entry j of the other sub-lattice's
// row when p = 1 and entry j-1 when p = 0; the right one is entry j+1 when
// p = 1 and entry j when p = 0; top and bottom are entry j of the rows above
// and below. row_par is the parity p of the first row of the group; it
// alternates from row to row inside the group.
//
// Purely combinational. The figure's bit numbering (1..16 for the same rows
// and 17..24 for the rows below and above, in an 8x8 lattice with 4 rows per
// group) is reproduced by the mapping above; the paper does not give widths
// for other sizes, so the same layout is scaled with L and P.
module neighbor_map #(
  parameter int unsigned L = 1024,
  parameter int unsigned P = 2048
) (
  input  logic [P-1:0]   nbr_word,
  input  logic [L/2-1:0] halo_top,
  input  logic [L/2-1:0] halo_bot,
  input  logic           row_par,
  output logic [P-1:0]   nl,
  output logic [P-1:0]   nt,
  output logic [P-1:0]   nr,
  output logic [P-1:0]   nb
);
  localparam int unsigned H    = L / 2;
  localparam int unsigned ROWS = P / H;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar j = 0; j < H; j++) begin : g_col
      localparam int unsigned I  = r * H + j;
      localparam int unsigned JL = (j + H - 1) % H;
      localparam int unsigned JR = (j + 1) % H;
      logic p;
      assign p = row_par ^ logic'(r % 2);
      assign nl[I] = p ? nbr_word[r*H + j]  : nbr_word[r*H + JL];
      assign nr[I] = p ? nbr_word[r*H + JR] : nbr_word[r*H + j];
      if (r == 0) begin : g_top
        assign nt[I] = halo_top[j];
      end else begin : g_tin
        assign nt[I] = nbr_word[(r-1)*H + j];
      end
      if (r == ROWS - 1) begin : g_bot
        assign nb[I] = halo_bot[j];
      end else begin : g_bin
        assign nb[I] = nbr_word[(r+1)*H + j];
      end
    end
  end

  initial assert (ROWS * H == P && ROWS <= L && L % ROWS == 0)
    else $error("neighbor_map: P must be a multiple of L/2 with 2P/L dividing L");
endmodule
