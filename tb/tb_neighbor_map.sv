// tb_neighbor_map: two checks of the neighbour connectivity.
// 1. The 8x8 example with 4 rows per group: driving one source bit at a
//    time, every updated spin k = 1..16 must see, as L, T, R, B, the sources
//    numbered in the connectivity figure (1..16 same rows, 17..20 row below,
//    21..24 row above).
// 2. A 16x16 lattice with 4 rows per group and both row parities: each
//    output is compared with neighbours found from lattice coordinates.
module tb_neighbor_map;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- 8x8, P = 16 ----
  logic [15:0] a_nbr, a_l, a_t, a_r, a_b;
  logic [3:0]  a_top, a_bot;
  logic        a_par;
  neighbor_map #(.L(8), .P(16)) dut_a (
    .nbr_word(a_nbr), .halo_top(a_top), .halo_bot(a_bot), .row_par(a_par),
    .nl(a_l), .nt(a_t), .nr(a_r), .nb(a_b)
  );

  // ---- 16x16, P = 32 ----
  logic [31:0] b_nbr, b_l, b_t, b_r, b_b;
  logic [7:0]  b_top, b_bot;
  logic        b_par;
  neighbor_map #(.L(16), .P(32)) dut_b (
    .nbr_word(b_nbr), .halo_top(b_top), .halo_bot(b_bot), .row_par(b_par),
    .nl(b_l), .nt(b_t), .nr(b_r), .nb(b_b)
  );

  // L, T, R, B source numbers of updated spins 1..16, read off the figure.
  int fig [16][4] = '{
    '{ 4, 21,  1,  5}, '{ 1, 22,  2,  6}, '{ 2, 23,  3,  7}, '{ 3, 24,  4,  8},
    '{ 5,  1,  6,  9}, '{ 6,  2,  7, 10}, '{ 7,  3,  8, 11}, '{ 8,  4,  5, 12},
    '{12,  5,  9, 13}, '{ 9,  6, 10, 14}, '{10,  7, 11, 15}, '{11,  8, 12, 16},
    '{13,  9, 14, 17}, '{14, 10, 15, 18}, '{15, 11, 16, 19}, '{16, 12, 13, 20}
  };

  initial begin
    // Part 1
    a_par = 1'b0;
    for (int src = 1; src <= 24; src++) begin
      a_nbr = '0; a_top = '0; a_bot = '0;
      if (src <= 16)      a_nbr[src-1]  = 1'b1;
      else if (src <= 20) a_bot[src-17] = 1'b1;
      else                a_top[src-21] = 1'b1;
      #1;
      for (int k = 0; k < 16; k++) begin
        check(a_l[k] == (fig[k][0] == src), $sformatf("spin %0d L src %0d", k+1, src));
        check(a_t[k] == (fig[k][1] == src), $sformatf("spin %0d T src %0d", k+1, src));
        check(a_r[k] == (fig[k][2] == src), $sformatf("spin %0d R src %0d", k+1, src));
        check(a_b[k] == (fig[k][3] == src), $sformatf("spin %0d B src %0d", k+1, src));
      end
    end
    // Part 2: lattice 16x16, group of rows y0..y0+3 of sub-lattice s.
    for (int trial = 0; trial < 200; trial++) begin
      bit lat [16][16];
      int s, g, y0;
      for (int y = 0; y < 16; y++)
        for (int x = 0; x < 16; x++) lat[y][x] = 1'($urandom);
      s  = trial % 2;
      g  = $urandom_range(0, 3);
      y0 = g * 4;
      // fill the other sub-lattice's words from the lattice
      for (int r = 0; r < 4; r++)
        for (int j = 0; j < 8; j++) begin
          int y, x;
          y = y0 + r;
          x = 2 * j + ((y + 1 - s) & 1);
          b_nbr[r*8 + j] = lat[y][x];
        end
      for (int j = 0; j < 8; j++) begin
        int yt, yb;
        yt = (y0 + 15) % 16;
        yb = (y0 + 4) % 16;
        b_top[j] = lat[yt][2 * j + ((yt + 1 - s) & 1)];
        b_bot[j] = lat[yb][2 * j + ((yb + 1 - s) & 1)];
      end
      b_par = 1'((y0 + s) & 1);
      #1;
      for (int r = 0; r < 4; r++)
        for (int j = 0; j < 8; j++) begin
          int y, x, i;
          y = y0 + r;
          x = 2 * j + ((y + s) & 1);
          i = r * 8 + j;
          check(b_l[i] == lat[y][(x + 15) % 16], $sformatf("L y=%0d x=%0d", y, x));
          check(b_r[i] == lat[y][(x + 1) % 16],  $sformatf("R y=%0d x=%0d", y, x));
          check(b_t[i] == lat[(y + 15) % 16][x], $sformatf("T y=%0d x=%0d", y, x));
          check(b_b[i] == lat[(y + 1) % 16][x],  $sformatf("B y=%0d x=%0d", y, x));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
