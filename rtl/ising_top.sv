// ising_top: 2-D Ising model Metropolis accelerator (checkerboard update).
//
// An L x L lattice with periodic boundaries and nearest-neighbour
// ferromagnetic coupling (J = 1, B = 0) is stored as two checkerboard
// sub-lattices in two memories (sublattice_ram). Each cycle one memory word,
// P spins forming ROWS = 2P/L whole lattice rows of one sub-lattice, is read
// together with the neighbouring spins of the other sub-lattice and updated
// by P parallel spin blocks (spin_array); the New_Spin word is written back
// the next cycle. update_ctrl walks all groups of sub-lattice 0 and then of
// sub-lattice 1, so one Monte Carlo step takes L*L/P cycles. Random numbers
// come from one global LFSR32 XORed with a local LFSR12 per spin block.
// mag_counter keeps the total magnetization, sampled on the schedule of the
// run. Defaults are the paper's main configuration: L = 1024, P = 2048
// (4 rows per word, 256 words per memory, 512 cycles per MCS).
//
// Interface:
//  clk_a        system clock (300 MHz in the paper);
//  clk_b        twice clk_a, rising edges aligned with clk_a, for the
//               Boltzmann table read (made by a PLL on the FPGA, not here);
//  lut_*        writes entry lut_idx = (eps+4)/2 of the shared Boltzmann
//               table, 12-bit fraction of exp(-2*eps/T) (the temperature);
//  start, therm_mcs, sample_gap, n_samples  start a run (see update_ctrl);
//  host_sub/host_addr/host_rdata  read any memory word while not busy;
//  sample_valid/sample_mag  magnetization samples; mag the running value.
// The host link itself (which board connector, which protocol) is not part
// of this design; these plain ports stand in for it.
module ising_top
  import ising_pkg::*;
#(
  parameter int unsigned L = 1024,
  parameter int unsigned P = 2048,
  parameter logic [31:0] LFSR32_SEED = 32'h1234_5678,
  localparam int unsigned H     = L / 2,
  localparam int unsigned ROWS  = 2 * P / L,
  localparam int unsigned DEPTH = L * L / (2 * P),
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic               clk_a,
  input  logic               clk_b,
  input  logic               rst_n,
  input  logic               lut_we,
  input  eps_idx_t           lut_idx,
  input  boltz_t             lut_data,
  input  logic               start,
  input  logic [31:0]        therm_mcs,
  input  logic [31:0]        sample_gap,
  input  logic [31:0]        n_samples,
  input  logic               host_sub,
  input  logic [AW-1:0]      host_addr,
  output logic [P-1:0]       host_rdata,
  output logic               busy,
  output logic               done,
  output logic [31:0]        mcs_count,
  output logic signed [31:0] mag,
  output logic               sample_valid,
  output logic signed [31:0] sample_mag
);
  boltz_table_t table_q;
  phase_e       phase;
  logic         en, init_we, sub, wb_en, wb_sub, sample;
  logic [AW-1:0] grp, wb_grp, grp_up, grp_dn;
  logic [11:0]  lfsr32_bits;
  logic [31:0]  lfsr32_state;
  logic [P-1:0] upd_word, nbr_word, new_word, flip, rnd_bit, wr_word;
  logic [H-1:0] halo_top, halo_bot;
  logic         row_par;
  logic [1:0]               ram_we;
  logic [AW-1:0]            ram_waddr;
  logic [2:0][AW-1:0]       ram_raddr;
  logic [1:0][2:0][P-1:0]   ram_rdata;
  logic [1:0][2:0]          ram_bypass;

  // Temperature: the five Boltzmann factors shared by all spin blocks.
  always_ff @(posedge clk_a or negedge rst_n) begin
    if (!rst_n)                                   table_q <= '0;
    else if (lut_we && lut_idx < eps_idx_t'(LUT_N)) table_q[lut_idx] <= lut_data;
  end

  update_ctrl #(.DEPTH(DEPTH)) u_ctrl (
    .clk(clk_a), .rst_n, .start, .therm_mcs, .sample_gap, .n_samples,
    .phase, .en, .init_we, .sub, .grp, .wb_en, .wb_sub, .wb_grp,
    .sample, .busy, .done, .mcs_count
  );

  lfsr32 #(.SEED(LFSR32_SEED)) u_lfsr32 (
    .clk(clk_a), .rst_n, .en, .rnd12(lfsr32_bits), .state(lfsr32_state)
  );

  // Group addresses of the rows above and below (periodic).
  assign grp_up = (grp == '0) ? AW'(DEPTH - 1) : grp - 1'b1;
  assign grp_dn = (grp == AW'(DEPTH - 1)) ? '0 : grp + 1'b1;
  assign ram_raddr[0] = busy ? grp : host_addr;
  assign ram_raddr[1] = grp_up;
  assign ram_raddr[2] = grp_dn;

  // Writes: random words during initialisation, New_Spin words afterwards.
  assign wr_word   = init_we ? rnd_bit : new_word;
  assign ram_waddr = init_we ? grp : wb_grp;
  assign ram_we[0] = (init_we && !sub) || (wb_en && !wb_sub);
  assign ram_we[1] = (init_we &&  sub) || (wb_en &&  wb_sub);

  for (genvar k = 0; k < 2; k++) begin : g_ram
    sublattice_ram #(.WIDTH(P), .DEPTH(DEPTH), .NRD(3)) u_ram (
      .clk(clk_a), .we(ram_we[k]), .waddr(ram_waddr), .wdata(wr_word),
      .raddr(ram_raddr), .rdata(ram_rdata[k]), .bypass(ram_bypass[k])
    );
  end

  // Word being updated from one memory, its neighbours from the other.
  always_comb begin
    upd_word = ram_rdata[sub][0];
    nbr_word = ram_rdata[!sub][0];
    halo_top = ram_rdata[!sub][1][P-1 -: H];   // last row of the group above
    halo_bot = ram_rdata[!sub][2][H-1:0];      // first row of the group below
  end
  assign row_par    = 1'(32'(grp) * ROWS + 32'(sub));
  assign host_rdata = ram_rdata[host_sub][0];

  spin_array #(.L(L), .P(P)) u_array (
    .clk_a, .clk_b, .rst_n, .en,
    .upd_word, .nbr_word, .halo_top, .halo_bot, .row_par,
    .lfsr32_bits, .table_i(table_q),
    .new_word, .flip, .rnd_bit
  );

  mag_counter #(.P(P), .N(L * L)) u_mag (
    .clk(clk_a), .rst_n, .clear(start && !busy),
    .init_we, .init_word(rnd_bit),
    .upd_en(en && !init_we), .cur_word(upd_word), .flip,
    .sample, .mag, .sample_valid, .sample_mag
  );

  initial assert (ROWS * H == P && ROWS <= L && L % ROWS == 0 && DEPTH >= 1)
    else $error("ising_top: unsupported L/P combination");
endmodule
