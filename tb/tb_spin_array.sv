// tb_spin_array: an 8x8 lattice updated one group (P = 16 spins, four rows)
// at a time by the spin array. For random lattices, sub-lattices, groups and
// Boltzmann tables the New_Spin word is compared with a Metropolis model
// that finds neighbours from lattice coordinates and keeps its own copy of
// every spin block's LFSR12 (seed (i*1567) mod 4095) and of the global bits.
module tb_spin_array;
  import ising_pkg::*;
  localparam int L = 8, P = 16, H = L / 2, ROWS = 2 * P / L, G = L * L / (2 * P);
  logic clk_a = 0, clk_b = 1, rst_n = 0, en = 0;
  logic [P-1:0] upd_word, nbr_word, new_word, flip, rnd_bit;
  logic [H-1:0] halo_top, halo_bot;
  logic row_par;
  logic [11:0] l32;
  boltz_table_t tbl;
  int checks = 0, failures = 0, n_flip = 0, n_keep = 0;

  spin_array #(.L(L), .P(P)) dut (
    .clk_a, .clk_b, .rst_n, .en, .upd_word, .nbr_word, .halo_top, .halo_bot,
    .row_par, .lfsr32_bits(l32), .table_i(tbl), .new_word, .flip, .rnd_bit
  );

  always #10 clk_a = ~clk_a;
  always #5  clk_b = ~clk_b;

  initial begin
    repeat (20000) @(posedge clk_a);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int col(input int y, input int j, input int s);
    return 2 * j + ((y + s) & 1);
  endfunction

  initial begin
    logic [11:0] m12 [P];
    int t_int [5];
    bit lat [L][L];
    logic [P-1:0] exp_word;
    for (int i = 0; i < P; i++) m12[i] = 12'((i * 1567) % 4095);
    upd_word = '0; nbr_word = '0; halo_top = '0; halo_bot = '0; row_par = 0;
    l32 = '0; tbl = '0;
    repeat (2) @(posedge clk_a);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      int s, g, y0;
      @(posedge clk_a); #1;
      for (int y = 0; y < L; y++) for (int x = 0; x < L; x++) lat[y][x] = 1'($urandom);
      if (n % 20 == 0)
        for (int k = 0; k < 5; k++) begin
          t_int[k] = int'($urandom_range(0, 4095));
          tbl[k] = 12'(t_int[k]);
        end
      s = $urandom_range(0, 1); g = $urandom_range(0, G - 1); y0 = g * ROWS;
      l32 = 12'($urandom);
      for (int r = 0; r < ROWS; r++)
        for (int j = 0; j < H; j++) begin
          upd_word[r*H + j] = lat[y0 + r][col(y0 + r, j, s)];
          nbr_word[r*H + j] = lat[y0 + r][col(y0 + r, j, 1 - s)];
        end
      for (int j = 0; j < H; j++) begin
        int yt, yb;
        yt = (y0 + L - 1) % L; yb = (y0 + ROWS) % L;
        halo_top[j] = lat[yt][col(yt, j, 1 - s)];
        halo_bot[j] = lat[yb][col(yb, j, 1 - s)];
      end
      row_par = 1'((y0 + s) & 1);
      en = 1;
      for (int r = 0; r < ROWS; r++)
        for (int j = 0; j < H; j++) begin
          int y, x, i, sum, eps, rr;
          bit sp;
          y = y0 + r; x = col(y, j, s); i = r * H + j;
          sp = lat[y][x];
          sum = (lat[y][(x+L-1)%L] ? 1 : -1) + (lat[y][(x+1)%L] ? 1 : -1)
              + (lat[(y+L-1)%L][x] ? 1 : -1) + (lat[(y+1)%L][x] ? 1 : -1);
          eps = sp ? sum : -sum;
          rr  = int'(m12[i] ^ l32);
          exp_word[i] = (eps <= 0 || rr < t_int[(eps + 4) / 2]) ? !sp : sp;
          if (exp_word[i] != sp) n_flip++; else n_keep++;
        end
      @(posedge clk_a); #1;
      en = 0;
      check(new_word == exp_word, $sformatf("n=%0d s=%0d g=%0d got %h exp %h", n, s, g, new_word, exp_word));
      for (int i = 0; i < P; i++) m12[i] = {m12[i][10:0], ~(m12[i][11] ^ m12[i][5] ^ m12[i][3] ^ m12[i][0])};
    end
    check(n_flip > 0 && n_keep > 0, "both outcomes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
