// tb_update_ctrl: runs the sequencer with DEPTH = 4 and several schedules and
// checks, cycle by cycle, the order of (sub-lattice, group) addresses, the
// one-cycle-late write-back, the length of each phase (2*DEPTH cycles of
// initialisation, 2*DEPTH cycles per MCS, one drain cycle), the MCS count
// and the cycles in which samples are raised.
module tb_update_ctrl;
  import ising_pkg::*;
  localparam int D = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] therm, gap, nsamp;
  phase_e phase;
  logic en, init_we, sub, wb_en, wb_sub, sample, busy, done;
  logic [1:0] grp, wb_grp;
  logic [31:0] mcs_count;
  int checks = 0, failures = 0;

  update_ctrl #(.DEPTH(D)) dut (
    .clk, .rst_n, .start, .therm_mcs(therm), .sample_gap(gap), .n_samples(nsamp),
    .phase, .en, .init_we, .sub, .grp, .wb_en, .wb_sub, .wb_grp,
    .sample, .busy, .done, .mcs_count
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input int th, input int gp, input int ns);
    int total, cyc, n_samp;
    bit prev_run; int prev_s, prev_g;
    total = th + gp * ns;
    @(negedge clk);
    therm = th; gap = gp; nsamp = ns; start = 1;
    @(negedge clk);
    start = 0;
    // initialisation
    for (int c = 0; c < 2 * D; c++) begin
      check(phase == PH_INIT && init_we && en, $sformatf("init cycle %0d", c));
      check(sub == 1'(c / D) && grp == 2'(c % D), "init address");
      check(!wb_en, "no write-back during init");
      @(negedge clk);
    end
    // sweeps
    n_samp = 0; prev_run = 0; prev_s = 0; prev_g = 0;
    for (int m = 0; m < total; m++)
      for (int c = 0; c < 2 * D; c++) begin
        bit exp_sample;
        check(phase == PH_RUN && en && !init_we, $sformatf("run mcs %0d cycle %0d", m, c));
        check(sub == 1'(c / D) && grp == 2'(c % D), "run address");
        check(mcs_count == 32'(m), "mcs count");
        check(wb_en == prev_run, "write-back enable");
        if (prev_run) check(wb_sub == 1'(prev_s) && wb_grp == 2'(prev_g), "write-back address");
        exp_sample = (c == 2 * D - 1) && (m + 1 > th) && ((m + 1 - th) % gp == 0);
        check(sample == exp_sample, $sformatf("sample mcs %0d", m));
        if (sample) n_samp++;
        prev_run = 1; prev_s = c / D; prev_g = c % D;
        @(negedge clk);
      end
    if (total > 0) begin
      check(phase == PH_DRAIN && wb_en && !en, "drain");
      check(wb_sub == 1'b1 && wb_grp == 2'(D - 1), "last write-back");
      @(negedge clk);
    end
    check(done && phase == PH_IDLE && !busy, "done");
    check(mcs_count == 32'(total), "final mcs count");
    check(n_samp == ns, $sformatf("samples %0d of %0d", n_samp, ns));
    @(negedge clk);
    check(!done, "done is a pulse");
  endtask

  initial begin
    therm = 0; gap = 1; nsamp = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(3, 2, 2);
    run(0, 1, 3);
    run(2, 3, 1);
    run(1, 1, 0);
    run(0, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
