// tb_lfsr32: checks the global LFSR32 against a bit-by-bit model of the
// flop chain (flops 1..32, flop 1 fed by XNOR of flops 32, 22, 2, 1), that
// en = 0 holds the state, that rnd12 is flops 1..12, and that no state
// repeats within the first 20000 steps.
module tb_lfsr32;
  logic clk = 0, rst_n = 0, en = 0;
  logic [11:0] rnd12;
  logic [31:0] state;
  int checks = 0, failures = 0;
  bit  m [1:32];
  int  cyc = 0;

  lfsr32 #(.SEED(32'hCAFE_0001)) dut (.clk, .rst_n, .en, .rnd12, .state);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic model_step();
    bit fb = !(m[32] ^ m[22] ^ m[2] ^ m[1]);
    for (int k = 32; k > 1; k--) m[k] = m[k-1];
    m[1] = fb;
  endtask

  function automatic logic [31:0] model_word();
    logic [31:0] w;
    for (int k = 1; k <= 32; k++) w[k-1] = m[k];
    return w;
  endfunction

  initial begin
    logic [31:0] first;
    for (int k = 1; k <= 32; k++) m[k] = 1'(32'hCAFE_0001 >> (k-1));
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == model_word(), "seed");
    first = state;
    en = 1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      model_step();
      check(state == model_word(), $sformatf("step %0d", n));
      check(rnd12 == state[11:0], "rnd12 is flops 1..12");
      if (n < 20000 - 1) check(state != first, "no early repeat");
    end
    en = 0;
    repeat (5) @(negedge clk);
    check(state == model_word(), "hold when en=0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
