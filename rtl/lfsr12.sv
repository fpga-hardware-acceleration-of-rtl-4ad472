// lfsr12: local 12-bit linear feedback shift register of one spin block.
//
// A chain of 12 flops, numbered 1..12 as in the paper's figure; each enabled
// clock flop k+1 takes flop k and flop 1 takes the XNOR of flops 12, 6, 4
// and 1 (the flop numbers the figure prints at the taps; the tap set is the
// maximal-length x^12+x^6+x^4+x+1, period 4095). The XNOR form is this
// design's reading of the figure; the all-ones state locks up and is not a
// legal seed. Every spin block gets its own seed so the 12-bit streams are
// different phases of the same sequence.
//
// Interface: q is the full 12-bit state (bit 0 = flop 1), used as a 12-bit
// random word. Timing: one shift per clock while en is high.
module lfsr12 #(
  parameter logic [11:0] SEED = 12'h001
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [11:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= SEED;
    else if (en) q <= {q[10:0], ~(q[11] ^ q[5] ^ q[3] ^ q[0])};
  end

  initial assert (SEED != '1) else $error("lfsr12: all-ones seed locks the XNOR LFSR");
endmodule
