// tb_mag_counter: feeds random initialisation words and random update
// cycles (current word and flip vector) and compares M with a count kept in
// the testbench, including the samples, the clear and the sample timing.
module tb_mag_counter;
  localparam int P = 64, N = 1024;
  logic clk = 0, rst_n = 0, clear = 0, init_we = 0, upd_en = 0, sample = 0;
  logic [P-1:0] init_word, cur_word, flip;
  logic signed [31:0] mag, sample_mag;
  logic sample_valid;
  int checks = 0, failures = 0;

  mag_counter #(.P(P), .N(N)) dut (
    .clk, .rst_n, .clear, .init_we, .init_word, .upd_en, .cur_word, .flip,
    .sample, .mag, .sample_valid, .sample_mag
  );

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int ones(input logic [P-1:0] w);
    int c = 0;
    for (int i = 0; i < P; i++) c += w[i];
    return c;
  endfunction

  initial begin
    int m_ones, exp_sample;
    bit sampled;
    init_word = '0; cur_word = '0; flip = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      @(negedge clk);
      clear = 1;
      m_ones = 0;
      @(negedge clk);
      clear = 0;
      check(mag == -N, "cleared");
      for (int w = 0; w < N / P; w++) begin   // initialisation
        init_we = 1;
        init_word = {$urandom, $urandom};
        m_ones += ones(init_word);
        @(negedge clk);
        check(mag == 2 * m_ones - N, "after init word");
      end
      init_we = 0;
      for (int n = 0; n < 500; n++) begin
        upd_en   = 1'($urandom);
        cur_word = {$urandom, $urandom};
        flip     = {$urandom, $urandom} & {$urandom, $urandom};
        sample   = (n % 7 == 3);
        if (upd_en) m_ones += ones(flip & ~cur_word) - ones(flip & cur_word);
        exp_sample = 2 * m_ones - N;
        sampled = sample;
        @(negedge clk);
        check(mag == 2 * m_ones - N, $sformatf("run %0d cycle %0d", run, n));
        check(sample_valid == sampled, "sample_valid");
        if (sampled) check(sample_mag == exp_sample, "sample value");
      end
      upd_en = 0; sample = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
