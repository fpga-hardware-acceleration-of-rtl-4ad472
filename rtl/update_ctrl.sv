// update_ctrl: sequencer of the checkerboard Metropolis sweep.
//
// A Monte Carlo step (MCS) updates every group of sub-lattice 0 and then
// every group of sub-lattice 1, one group per cycle (the paper's Fig. 5-8:
// steps 1 and 2 update the two address rows of the grey memory, steps 3 and
// 4 those of the white one). One MCS therefore takes 2*DEPTH cycles, 512 at
// L = 1024 and P = 2048, which is the 1706.6 ns at 300 MHz of the paper's
// Table IV.
//
// A run, started by a one-cycle start pulse, is:
//   INIT  2*DEPTH cycles writing random spins into both memories;
//   RUN   therm_mcs + sample_gap*n_samples MCS; after the first therm_mcs
//         MCS (thermalisation) every sample_gap-th MCS raises sample in its
//         last cycle, so the magnetization is sampled n_samples times;
//   DRAIN one cycle for the last New_Spin write-back.
// The paper's runs use 1000, 100 and 1000 (101000 MCS); the counts are ports
// so a host can choose them. The random initial lattice and the exact
// position of the samples are this design's choices.
//
// Interface: en enables the spin blocks and the LFSRs; sub/grp address the
// word being updated (or initialised when init_we is high); wb_en/wb_sub/
// wb_grp are the same, one cycle later, for writing New_Spin back.
// Timing: all outputs registered or decoded from registers; done pulses for
// one cycle when the run ends.
module update_ctrl
  import ising_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   therm_mcs,
  input  logic [31:0]   sample_gap,
  input  logic [31:0]   n_samples,
  output phase_e        phase,
  output logic          en,
  output logic          init_we,
  output logic          sub,
  output logic [AW-1:0] grp,
  output logic          wb_en,
  output logic          wb_sub,
  output logic [AW-1:0] wb_grp,
  output logic          sample,
  output logic          busy,
  output logic          done,
  output logic [31:0]   mcs_count
);
  logic [31:0] total_q, gap_q, therm_q, gap_cnt;
  logic        last_grp;

  assign last_grp = sub && (grp == AW'(DEPTH - 1));
  assign en       = (phase == PH_INIT) || (phase == PH_RUN);
  assign init_we  = (phase == PH_INIT);
  assign busy     = (phase != PH_IDLE);
  assign sample   = (phase == PH_RUN) && last_grp && (mcs_count >= therm_q)
                    && (gap_cnt == gap_q - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= PH_IDLE;
      sub       <= 1'b0;
      grp       <= '0;
      wb_en     <= 1'b0;
      wb_sub    <= 1'b0;
      wb_grp    <= '0;
      done      <= 1'b0;
      mcs_count <= '0;
      total_q   <= '0;
      gap_q     <= 32'd1;
      therm_q   <= '0;
      gap_cnt   <= '0;
    end else begin
      done   <= 1'b0;
      wb_en  <= (phase == PH_RUN);
      wb_sub <= sub;
      wb_grp <= grp;
      if (en) begin
        if (grp == AW'(DEPTH - 1)) begin
          grp <= '0;
          sub <= ~sub;
        end else begin
          grp <= grp + 1'b1;
        end
      end
      case (phase)
        PH_IDLE: if (start) begin
          phase     <= PH_INIT;
          sub       <= 1'b0;
          grp       <= '0;
          mcs_count <= '0;
          gap_cnt   <= '0;
          therm_q   <= therm_mcs;
          gap_q     <= (sample_gap == 0) ? 32'd1 : sample_gap;
          total_q   <= therm_mcs + ((sample_gap == 0) ? 32'd1 : sample_gap) * n_samples;
        end
        PH_INIT: if (last_grp) begin
          if (total_q == 0) begin
            phase <= PH_IDLE;
            done  <= 1'b1;
          end else begin
            phase <= PH_RUN;
          end
        end
        PH_RUN: if (last_grp) begin
          mcs_count <= mcs_count + 1;
          if (mcs_count >= therm_q)
            gap_cnt <= (gap_cnt == gap_q - 1) ? '0 : gap_cnt + 1;
          if (mcs_count + 1 == total_q) phase <= PH_DRAIN;
        end
        PH_DRAIN: begin
          phase <= PH_IDLE;
          done  <= 1'b1;
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  // The write-back always follows its update by exactly one cycle.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (phase == PH_RUN) |=> wb_en);
endmodule
