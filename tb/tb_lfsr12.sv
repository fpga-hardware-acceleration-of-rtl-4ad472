// tb_lfsr12: checks the local LFSR12 against a model of the flop chain
// (flop 1 fed by XNOR of flops 12, 6, 4, 1), that its period is exactly
// 4095 (maximal length for an XNOR LFSR), and that en = 0 holds the state.
module tb_lfsr12;
  logic clk = 0, rst_n = 0, en = 0;
  logic [11:0] q;
  int checks = 0, failures = 0;
  logic [11:0] m;

  lfsr12 #(.SEED(12'h5A3)) dut (.clk, .rst_n, .en, .q);

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

  initial begin
    int period;
    m = 12'h5A3;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(q == m, "seed");
    en = 1;
    period = 0;
    for (int n = 1; n <= 4095; n++) begin
      @(negedge clk);
      // bit k-1 holds flop k
      m = {m[10:0], ~(m[11] ^ m[5] ^ m[3] ^ m[0])};
      check(q == m, $sformatf("step %0d", n));
      if (q == 12'h5A3 && period == 0) period = n;
    end
    check(period == 4095, $sformatf("period %0d", period));
    en = 0;
    repeat (3) @(negedge clk);
    check(q == m, "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
