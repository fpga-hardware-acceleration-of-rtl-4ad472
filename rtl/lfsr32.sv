// lfsr32: global 32-bit linear feedback shift register.
//
// One instance serves all spin blocks. The register is a chain of 32 flops,
// numbered 1..32 as in the paper's figure of the generator; every enabled
// clock the chain shifts by one (flop k+1 takes flop k) and flop 1 takes the
// XNOR of flops 32, 22, 2 and 1. The flop numbers 1, 2, 22 and 32 at the taps
// are the ones the figure prints; the XNOR form and this tap set (a maximal
// length polynomial x^32+x^22+x^2+x+1) are this design's reading of it, since
// the text only says the feedback is "normally XOR or XNOR". In the XNOR form
// the all-ones state locks up, so the seed must not be all ones.
//
// Interface: rnd12 are flops 1..12 (bit 0 = flop 1), the "first 12 bits" that
// are XORed with each spin block's local LFSR12. state is the whole register.
// Timing: one shift per clock while en is high; outputs are registered.
module lfsr32 #(
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [11:0] rnd12,
  output logic [31:0] state
);
  logic [31:0] q;   // q[k-1] is flop k

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= SEED;
    else if (en) q <= {q[30:0], ~(q[31] ^ q[21] ^ q[1] ^ q[0])};
  end

  assign rnd12 = q[11:0];
  assign state = q;

  initial assert (SEED != '1) else $error("lfsr32: all-ones seed locks the XNOR LFSR");
endmodule
