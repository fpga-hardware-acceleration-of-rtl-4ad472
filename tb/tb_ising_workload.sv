// tb_ising_workload: the measurement runs of the paper on the lattice sizes
// where one memory word holds a whole sub-lattice (16x16 with 128 spin
// blocks, 32x32 with 512), each at three temperatures, with the paper's
// schedule: 1000 MCS of thermalisation, then 1000 magnetization samples
// 100 MCS apart (101000 MCS per temperature).
//
// Checks: each run takes exactly 2*(1 + 101000) + 1 cycles, i.e. 2 cycles per
// MCS (6.6 ns at 300 MHz); all 1000 samples arrive; and the physics: at
// T = 1.5 the mean |m| is close to the exact infinite-lattice value 0.986,
// at T = 3.5 it is small, and the susceptibility
// chi = (<M^2> - <|M|>^2)/(T*N) is largest of the three near T = 2.3.
// Sample statistics are printed for inspection.
module tb_ising_workload;
  import ising_pkg::*;
  localparam int THERM = 1000, GAP = 100, NSAMP = 1000;
  localparam int NT = 3;
  localparam real TEMPS [NT] = '{1.5, 2.3, 3.5};

  logic clk_a = 0, clk_b = 1, rst_n = 0;
  logic lut_we = 0, start = 0;
  eps_idx_t lut_idx = '0;
  boltz_t lut_data = '0;
  logic [31:0] therm_mcs = THERM, sample_gap = GAP, n_samples = NSAMP;

  logic [127:0] rd16;
  logic [511:0] rd32;
  logic busy16, done16, sv16, busy32, done32, sv32;
  logic [31:0] mcs16, mcs32;
  logic signed [31:0] mag16, smag16, mag32, smag32;

  ising_top #(.L(16), .P(128)) u_l16 (
    .clk_a, .clk_b, .rst_n, .lut_we, .lut_idx, .lut_data, .start,
    .therm_mcs, .sample_gap, .n_samples, .host_sub(1'b0), .host_addr(1'b0),
    .host_rdata(rd16), .busy(busy16), .done(done16), .mcs_count(mcs16),
    .mag(mag16), .sample_valid(sv16), .sample_mag(smag16)
  );
  ising_top #(.L(32), .P(512)) u_l32 (
    .clk_a, .clk_b, .rst_n, .lut_we, .lut_idx, .lut_data, .start,
    .therm_mcs, .sample_gap, .n_samples, .host_sub(1'b0), .host_addr(1'b0),
    .host_rdata(rd32), .busy(busy32), .done(done32), .mcs_count(mcs32),
    .mag(mag32), .sample_valid(sv32), .sample_mag(smag32)
  );

  always #10 clk_a = ~clk_a;
  always #5  clk_b = ~clk_b;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk_a) cycles++;

  initial begin
    wait (cycles >= 64'(NT) * 64'(2 * (THERM + GAP * NSAMP + 10)) + 1000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // sample accumulators
  int   n16, n32;
  real  s16, q16, s32, q32;
  always @(posedge clk_a) begin
    if (sv16) begin n16++; s16 += (smag16 < 0) ? -real'(smag16) : real'(smag16); q16 += real'(smag16) * real'(smag16); end
    if (sv32) begin n32++; s32 += (smag32 < 0) ? -real'(smag32) : real'(smag32); q32 += real'(smag32) * real'(smag32); end
  end

  initial begin
    real m16 [NT], m32 [NT], c16 [NT], c32 [NT];
    repeat (3) @(negedge clk_a);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      longint t0, len;
      real T;
      T = TEMPS[t];
      for (int k = 0; k < 5; k++) begin
        real v;
        v = $exp(-2.0 * real'(2 * k - 4) / T) * 4096.0;
        @(negedge clk_a);
        lut_we = 1; lut_idx = eps_idx_t'(k);
        lut_data = (v >= 4095.0) ? 12'd4095 : boltz_t'(int'($floor(v)));
      end
      @(negedge clk_a);
      lut_we = 0;
      n16 = 0; s16 = 0; q16 = 0; n32 = 0; s32 = 0; q32 = 0;
      start = 1;
      @(negedge clk_a);
      start = 0;
      t0 = cycles;
      wait (done16 && done32);
      @(negedge clk_a);
      len = cycles - t0;
      check(len == 64'(2 * (1 + THERM + GAP * NSAMP) + 1),
            $sformatf("T=%0.2f run length %0d cycles", T, len));
      check(n16 == NSAMP && n32 == NSAMP, $sformatf("samples %0d %0d", n16, n32));
      m16[t] = s16 / n16 / 256.0;
      m32[t] = s32 / n32 / 1024.0;
      c16[t] = (q16 / n16 - (s16 / n16) * (s16 / n16)) / (T * 256.0);
      c32[t] = (q32 / n32 - (s32 / n32) * (s32 / n32)) / (T * 1024.0);
      $display("T=%0.2f  L=16: <|m|>=%0.4f chi=%0.3f   L=32: <|m|>=%0.4f chi=%0.3f",
               T, m16[t], c16[t], m32[t], c32[t]);
    end
    check(m16[0] > 0.95 && m32[0] > 0.95, "ordered at T=1.5");
    check(m16[2] < 0.45 && m32[2] < 0.35, "disordered at T=3.5");
    check(c16[1] > c16[0] && c16[1] > c16[2], "chi peaks near Tc, L=16");
    check(c32[1] > c32[0] && c32[1] > c32[2], "chi peaks near Tc, L=32");
    check(c32[1] > c16[1], "chi maximum grows with L");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
