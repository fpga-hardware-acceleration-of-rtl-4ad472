// tb_boltzmann_lut: loads random tables, presents every index and checks the
// entry appears at the output after one clk_b edge and not before.
module tb_boltzmann_lut;
  import ising_pkg::*;
  logic clk_b = 0;
  boltz_table_t tbl;
  eps_idx_t idx;
  boltz_t value;
  int checks = 0, failures = 0;

  boltzmann_lut dut (.clk_b, .table_i(tbl), .eps_idx(idx), .value);

  always #5 clk_b = ~clk_b;

  initial begin
    repeat (5000) @(posedge clk_b);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [11:0] words [5];
    for (int t = 0; t < 50; t++) begin
      for (int k = 0; k < 5; k++) begin
        words[k] = 12'($urandom);
        tbl[k] = words[k];
      end
      for (int k = 0; k < 5; k++) begin
        @(negedge clk_b);
        idx = eps_idx_t'(k);
        @(posedge clk_b); #1;
        check(value == words[k], $sformatf("table %0d entry %0d", t, k));
      end
      // a changed index is not visible before the next edge
      @(negedge clk_b);
      idx = 3'd0;
      #1 check(value == words[4], "registered output");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
