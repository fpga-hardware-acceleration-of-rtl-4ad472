// mag_counter: running total magnetization M = sum of all spins.
//
// The paper evaluates m = <M>/N and the susceptibility from the fluctuations
// of M (Eq. 4-5) but does not say where M is formed. Here it is kept on chip
// by counting the +1 spins: during initialisation the ones of every random
// word written are added; during the sweep, every flip of a 0 (-1) to 1 (+1)
// adds one and every flip of a 1 to 0 subtracts one. M = 2*ones - N.
// Sampling M therefore costs no extra cycles, which agrees with the paper's
// run times in Table IV, where the whole run takes exactly
// 101000 MCS x 2*DEPTH cycles.
//
// Interface: clear zeroes the count (start of a run); init_we/init_word
// count a word written during initialisation; upd_en/cur_word/flip count the
// flips of one update cycle; sample captures M including this cycle into
// sample_mag and raises sample_valid for one cycle.
// Timing: mag is registered and reflects all cycles up to the previous edge.
module mag_counter #(
  parameter int unsigned P = 2048,
  parameter int unsigned N = 1024 * 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               init_we,
  input  logic [P-1:0]       init_word,
  input  logic               upd_en,
  input  logic [P-1:0]       cur_word,
  input  logic [P-1:0]       flip,
  input  logic               sample,
  output logic signed [31:0] mag,
  output logic               sample_valid,
  output logic signed [31:0] sample_mag
);
  logic [31:0] ones_q, ones_d;
  logic [31:0] n_init, n_up, n_down;

  always_comb begin
    n_init = 32'($countones(init_word));
    n_up   = 32'($countones(flip & ~cur_word));
    n_down = 32'($countones(flip & cur_word));
    ones_d = ones_q;
    if (init_we) ones_d = ones_d + n_init;
    if (upd_en)  ones_d = ones_d + n_up - n_down;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ones_q       <= '0;
      sample_valid <= 1'b0;
      sample_mag   <= '0;
    end else begin
      ones_q       <= clear ? '0 : ones_d;
      sample_valid <= sample;
      if (sample) sample_mag <= signed'(2 * ones_d) - signed'(32'(N));
    end
  end

  assign mag = signed'(2 * ones_q) - signed'(32'(N));
endmodule
