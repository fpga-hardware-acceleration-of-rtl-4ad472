// sublattice_ram: memory holding the spins of one checkerboard sub-lattice.
//
// The design has two of these, one per sub-lattice, as in the paper's Fig. 3.
// Each address holds one group of ROWS lattice rows of the sub-lattice (P
// bits), so DEPTH = L*L/(2*P) words; at L = 1024 and P = 2048 that is 256
// words of 2048 bits, 512 kbit per memory. One write port stores the
// New_Spin word of the group just updated. Three read ports serve a cycle of
// the update: the word at the current group address and the words of the
// groups above and below it (for their boundary rows). Reads are
// asynchronous, and a read of the address being written in the same cycle
// returns the data being written (write-through bypass), so that the first
// group of one sub-lattice sweep sees the last word of the previous sweep,
// written one cycle late by the New_Spin pipeline register.
//
// This read structure is this design's own choice: the paper does not say
// how the boundary rows reach the third register, and a Virtex-5 block RAM
// has two synchronous ports, so an FPGA build would keep a copy of the
// boundary rows or add a read stage.
//
// Timing: write on the rising clock edge when we is high; reads combinational.
module sublattice_ram #(
  parameter int unsigned WIDTH = 2048,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned NRD   = 3,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [AW-1:0]             waddr,
  input  logic [WIDTH-1:0]          wdata,
  input  logic [NRD-1:0][AW-1:0]    raddr,
  output logic [NRD-1:0][WIDTH-1:0] rdata,
  output logic [NRD-1:0]            bypass
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  always_comb
    for (int k = 0; k < NRD; k++) begin
      bypass[k] = we && (raddr[k] == waddr);
      rdata[k]  = bypass[k] ? wdata : mem[raddr[k]];
    end
endmodule
