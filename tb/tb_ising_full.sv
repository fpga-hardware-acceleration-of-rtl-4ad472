// tb_ising_full: the end-to-end test of tb_ising_top with the accelerator at
// its default size (1024 x 1024 lattice, 2048 spin blocks, 512 cycles per
// MCS) and a short schedule: one thermalisation MCS, then two samples one
// MCS apart. Everything else is as described below for the small run.
//
// Reference: a Metropolis simulation kept in the testbench.
//
// The reference holds the whole lattice as a 2-D array and its own copies of
// the global LFSR32 and of every spin block's LFSR12. It repeats the
// accelerator's schedule: random initial spins (the top bit of each block's
// random number), then, per Monte Carlo step, every group of sub-lattice 0
// and then of sub-lattice 1, each spin flipped when eps <= 0 or when
// r < table[(eps+4)/2]. Because spins of one sub-lattice never neighbour each
// other, updating the reference in place gives the same result as the
// hardware's parallel update. The testbench checks every magnetization
// sample, the running magnetization, the whole final lattice (read back word
// by word through the host port), and the run length in cycles:
// 2*DEPTH*(1 + MCS) + 1. It counts each mechanism of the design and fails
// if one never occurs: random initialisation, energy-lowering flips,
// thermal (Boltzmann) flips, rejected flips, write-through bypass reads at
// sub-lattice switches, periodic wrap of the group address, samples.
module tb_ising_full;
  import ising_pkg::*;
  localparam int L = 1024, P = 2048;
  localparam int H = L / 2, ROWS = 2 * P / L, G = L * L / (2 * P);
  localparam int AW = (G > 1) ? $clog2(G) : 1;
  localparam real TEMP = 2.0;
  localparam int THERM = 1, GAP = 1, NSAMP = 2;
  localparam logic [31:0] SEED32 = 32'h1234_5678;   // the top's default

  logic clk_a = 0, clk_b = 1, rst_n = 0;
  logic lut_we = 0, start = 0, host_sub = 0;
  eps_idx_t lut_idx = '0;
  boltz_t lut_data = '0;
  logic [31:0] therm_mcs = 0, sample_gap = 1, n_samples = 0;
  logic [AW-1:0] host_addr = '0;
  logic [P-1:0] host_rdata;
  logic busy, done, sample_valid;
  logic [31:0] mcs_count;
  logic signed [31:0] mag, sample_mag;

  ising_top u_top (
    .clk_a, .clk_b, .rst_n, .lut_we, .lut_idx, .lut_data, .start,
    .therm_mcs, .sample_gap, .n_samples, .host_sub, .host_addr, .host_rdata,
    .busy, .done, .mcs_count, .mag, .sample_valid, .sample_mag
  );

  always #10 clk_a = ~clk_a;
  always #5  clk_b = ~clk_b;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk_a) cycles++;

  localparam longint WATCHDOG = 64'(2 * G) * 64'(THERM + GAP * NSAMP + 4) + 20000;
  initial begin
    wait (cycles >= WATCHDOG);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // DUT samples and bypass reads
  int dut_samples [$];
  longint n_bypass = 0;
  always @(posedge clk_a) begin
    if (sample_valid) dut_samples.push_back(sample_mag);
    // a neighbour word read while the same word is being written back
    if (u_top.en && !u_top.init_we &&
        (u_top.sub ? |u_top.g_ram[0].u_ram.bypass : |u_top.g_ram[1].u_ram.bypass))
      n_bypass++;
  end

  // ---------------- reference model ----------------
  bit lat [L][L];
  logic [11:0] m12 [P];
  logic [31:0] m32;
  int tbl [5];
  longint n_init = 0, n_down = 0, n_therm = 0, n_reject = 0, n_wrap = 0;

  function automatic int col(input int y, input int j, input int s);
    return 2 * j + ((y + s) & 1);
  endfunction

  task automatic step_rng();
    for (int i = 0; i < P; i++)
      m12[i] = {m12[i][10:0], ~(m12[i][11] ^ m12[i][5] ^ m12[i][3] ^ m12[i][0])};
    m32 = {m32[30:0], ~(m32[31] ^ m32[21] ^ m32[1] ^ m32[0])};
  endtask

  function automatic int model_mag();
    int m = 0;
    for (int y = 0; y < L; y++) for (int x = 0; x < L; x++) m += lat[y][x] ? 1 : -1;
    return m;
  endfunction

  task automatic model_init();
    for (int s = 0; s < 2; s++)
      for (int g = 0; g < G; g++) begin
        for (int i = 0; i < P; i++) begin
          int y, x;
          logic [11:0] r;
          y = g * ROWS + i / H; x = col(y, i % H, s);
          r = m12[i] ^ m32[11:0];
          lat[y][x] = r[11];
        end
        n_init++;
        step_rng();
      end
  endtask

  task automatic model_mcs();
    for (int s = 0; s < 2; s++)
      for (int g = 0; g < G; g++) begin
        if (g == 0 || g == G - 1) n_wrap++;
        for (int i = 0; i < P; i++) begin
          int y, x, sum, eps, r;
          bit sp;
          y = g * ROWS + i / H; x = col(y, i % H, s);
          sp = lat[y][x];
          sum = (lat[y][(x+L-1)%L] ? 1 : -1) + (lat[y][(x+1)%L] ? 1 : -1)
              + (lat[(y+L-1)%L][x] ? 1 : -1) + (lat[(y+1)%L][x] ? 1 : -1);
          eps = sp ? sum : -sum;
          r = int'(m12[i] ^ m32[11:0]);
          if (eps <= 0) begin lat[y][x] = !sp; n_down++; end
          else if (r < tbl[(eps + 4) / 2]) begin lat[y][x] = !sp; n_therm++; end
          else n_reject++;
        end
        step_rng();
      end
  endtask

  initial begin
    int exp_samples [$];
    longint t0, run_cycles;
    int total;
    total = THERM + GAP * NSAMP;
    for (int i = 0; i < P; i++) m12[i] = 12'((i * 1567) % 4095);
    m32 = SEED32;
    for (int k = 0; k < 5; k++) begin
      real v;
      v = $exp(-2.0 * real'(2 * k - 4) / TEMP) * 4096.0;
      tbl[k] = (v >= 4095.0) ? 4095 : int'($floor(v));
    end
    repeat (3) @(negedge clk_a);
    rst_n = 1;
    // temperature
    for (int k = 0; k < 5; k++) begin
      @(negedge clk_a);
      lut_we = 1; lut_idx = eps_idx_t'(k); lut_data = boltz_t'(tbl[k]);
    end
    @(negedge clk_a);
    lut_we = 0;
    // run
    therm_mcs = THERM; sample_gap = GAP; n_samples = NSAMP;
    start = 1;
    @(negedge clk_a);
    start = 0;
    t0 = cycles;
    // reference
    model_init();
    for (int m = 1; m <= total; m++) begin
      model_mcs();
      if (m > THERM && (m - THERM) % GAP == 0) exp_samples.push_back(model_mag());
    end
    wait (done);
    @(negedge clk_a);
    run_cycles = cycles - t0;
    check(run_cycles == 64'(2 * G * (1 + total) + 1),
          $sformatf("run length %0d cycles, expected %0d", run_cycles, 2 * G * (1 + total) + 1));
    check(mcs_count == 32'(total), "MCS count");
    check(dut_samples.size() == exp_samples.size(),
          $sformatf("%0d samples, expected %0d", dut_samples.size(), exp_samples.size()));
    foreach (exp_samples[k])
      if (k < dut_samples.size())
        check(dut_samples[k] == exp_samples[k],
              $sformatf("sample %0d: %0d expected %0d", k, dut_samples[k], exp_samples[k]));
    check(mag == model_mag(), $sformatf("final M %0d expected %0d", mag, model_mag()));
    // read back the lattice
    for (int s = 0; s < 2; s++)
      for (int g = 0; g < G; g++) begin
        logic [P-1:0] w;
        host_sub = 1'(s); host_addr = AW'(g);
        #1;
        for (int i = 0; i < P; i++) begin
          int y;
          y = g * ROWS + i / H;
          w[i] = lat[y][col(y, i % H, s)];
        end
        check(host_rdata == w, $sformatf("lattice word s=%0d g=%0d", s, g));
      end
    $display("mechanisms: init words %0d, energy-lowering flips %0d, thermal flips %0d, rejected %0d, bypass cycles %0d, wrap groups %0d, samples %0d",
             n_init, n_down, n_therm, n_reject, n_bypass, n_wrap, dut_samples.size());
    $display("final m = %0f", real'(mag) / real'(L * L));
    check(n_init > 0, "init happened");
    check(n_down > 0, "energy-lowering flip happened");
    check(n_therm > 0, "thermal flip happened");
    check(n_reject > 0, "rejection happened");
    check(n_bypass > 0, "bypass happened");
    check(n_wrap > 0, "periodic wrap happened");
    check(dut_samples.size() > 0, "sample happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
