// tb_sublattice_ram: random writes and reads against an array model, on a
// 16 x 64-bit memory with three read ports; checks the write-through bypass
// (a read of the address being written returns the new data in the same
// cycle) and that it happened.
module tb_sublattice_ram;
  localparam int W = 64, D = 16, AW = 4;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr;
  logic [W-1:0]  wdata;
  logic [2:0][AW-1:0] raddr;
  logic [2:0][W-1:0]  rdata;
  logic [2:0]         bypass;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0, n_bypass = 0;

  sublattice_ram #(.WIDTH(W), .DEPTH(D), .NRD(3)) dut (
    .clk, .we, .waddr, .wdata, .raddr, .rdata, .bypass
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

  initial begin
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we    = 1'($urandom);
      waddr = AW'($urandom);
      wdata = {$urandom, $urandom};
      for (int k = 0; k < 3; k++) raddr[k] = (n % 4 == 0 && k == 0) ? waddr : AW'($urandom);
      #1;
      for (int k = 0; k < 3; k++) begin
        logic [W-1:0] exp_d;
        exp_d = (we && raddr[k] == waddr) ? wdata : model[raddr[k]];
        check(rdata[k] == exp_d, $sformatf("n=%0d port %0d", n, k));
        check(bypass[k] == (we && raddr[k] == waddr), "bypass flag");
        if (we && raddr[k] == waddr) n_bypass++;
      end
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    check(n_bypass > 0, "bypass exercised");
    $display("bypass reads: %0d", n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
