// tb_spin_unit: drives one spin block with random spins, neighbours, global
// random bits and Boltzmann tables, and compares New_Spin with a model of the
// Metropolis rule: flip if eps <= 0, or if r < table[(eps+4)/2] where
// eps = S0*(sum of neighbours in +-1) and r = LFSR12 ^ LFSR32 bits. Clk_B
// runs at twice Clk_A with aligned rising edges. Checks that every path
// (energy-lowering flip, thermal flip, rejection) occurs.
module tb_spin_unit;
  import ising_pkg::*;
  logic clk_a = 0, clk_b = 1, rst_n = 0, en = 0;
  logic spin, nl, nt, nr, nb;
  logic [11:0] l32;
  boltz_table_t tbl;
  logic new_spin, s_change;
  logic [11:0] rnd;
  int checks = 0, failures = 0;
  int n_down = 0, n_therm = 0, n_reject = 0;
  localparam logic [11:0] SEED = 12'h2B7;

  spin_unit #(.SEED(SEED)) dut (
    .clk_a, .clk_b, .rst_n, .en, .spin, .nl, .nt, .nr, .nb,
    .lfsr32_bits(l32), .table_i(tbl), .new_spin, .s_change, .rnd
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

  initial begin
    logic [11:0] m12;
    int s0, sum, eps, r;
    int t_int [5];
    bit exp_spin;
    m12 = SEED;
    spin = 0; nl = 0; nt = 0; nr = 0; nb = 0; l32 = 0; tbl = '0;
    repeat (2) @(posedge clk_a);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(posedge clk_a); #1;
      en = 1;
      {spin, nl, nt, nr, nb} = 5'($urandom);
      l32 = 12'($urandom);
      if (n % 50 == 0)
        for (int k = 0; k < 5; k++) begin
          t_int[k] = int'($urandom_range(0, 4095));
          tbl[k] = 12'(t_int[k]);
        end
      s0  = spin ? 1 : -1;
      sum = (nl ? 1 : -1) + (nt ? 1 : -1) + (nr ? 1 : -1) + (nb ? 1 : -1);
      eps = s0 * sum;
      r   = int'(m12 ^ l32);
      #1;
      check(rnd == (m12 ^ l32), "random number is LFSR12 xor LFSR32");
      if (eps <= 0) begin exp_spin = !spin; n_down++; end
      else if (r < t_int[(eps + 4) / 2]) begin exp_spin = !spin; n_therm++; end
      else begin exp_spin = spin; n_reject++; end
      @(posedge clk_a); #1;
      check(new_spin == exp_spin, $sformatf("n=%0d spin=%0d eps=%0d r=%0d", n, spin, eps, r));
      m12 = {m12[10:0], ~(m12[11] ^ m12[5] ^ m12[3] ^ m12[0])};
      en = 0;
      // hold: with en low neither the spin nor the LFSR moves
      @(posedge clk_a); #1;
      check(new_spin == exp_spin, "hold");
    end
    check(n_down > 0 && n_therm > 0 && n_reject > 0,
          $sformatf("paths down=%0d thermal=%0d reject=%0d", n_down, n_therm, n_reject));
    $display("paths: energy-lowering %0d, thermal %0d, rejected %0d", n_down, n_therm, n_reject);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
