// pbit_update_ctrl -- p-bit state register and sequential (Gibbs) update control.
//
// The p-computer is a discrete Hopfield network run with stochastic p-bits.
// The p-bits are updated one at a time, in index order, each update using the
// latest state of all others: the p-bit outputs drive the wordlines, the MAC
// of p-bit i's bitline pair plus the random bias -u is sensed, and the result
// becomes x_i. One pass over all n_pbits p-bits is one iteration; a trial is
// n_iters iterations. The chip's figure shows this loop (sense -> "sequentially
// update the input signal" -> WL switching matrix); the three-cycle step below
// and the cleared initial state are this design's own choices.
//
// One update of p-bit i takes three cycles:
//   DRAW  : rng_en - the Gaussian RNG draws u for this update;
//   READ  : wl_drive, rd_en, rd_col = i - wordlines driven from state and u,
//           the array latches the bitline-pair currents;
//   SENSE : x_i <= s (sense amplifier output).
// A trial therefore takes 3 * n_pbits * n_iters cycles after the start cycle.
// iter_tick is high in the SENSE cycle of the last p-bit of an iteration (so
// the DSA schedule changes sigma before the next draw); sample_valid pulses in
// the following cycle, when state holds the configuration reached by that
// iteration. done pulses with the last sample_valid of the trial.
//
// Interface: start (in IDLE) clears the state to all zeros and begins a trial
// with n_pbits (1..N_BLP) and n_iters (>= 1) p-bits and iterations.
//
// Lint note: rst_n is both the asynchronous reset of the registers and the
// disable condition of this module's assertions, which a linter may report as
// a reset used both synchronously and asynchronously; the assertions are not
// logic, so the reset tree is unaffected.
module pbit_update_ctrl #(
  parameter int unsigned N_BLP  = 512,
  parameter int unsigned ITER_W = 16,
  localparam int unsigned COL_W = $clog2(N_BLP)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [COL_W:0]    n_pbits,
  input  logic [ITER_W-1:0] n_iters,
  input  logic              s,
  output logic              rng_en,
  output logic              wl_drive,
  output logic              rd_en,
  output logic [COL_W-1:0]  rd_col,
  output logic [N_BLP-1:0]  state,
  output logic              iter_tick,
  output logic              sample_valid,
  output logic [ITER_W-1:0] iter_cnt,
  output logic              busy,
  output logic              done
);

  typedef enum logic [1:0] {S_IDLE, S_DRAW, S_READ, S_SENSE} phase_e;

  phase_e            phase;
  logic [COL_W-1:0]  idx;
  logic              last_pbit, last_iter;

  assign last_pbit = ({1'b0, idx} == n_pbits - 1'b1);
  assign last_iter = (iter_cnt == n_iters - 1'b1);

  assign rng_en    = (phase == S_DRAW);
  assign wl_drive  = (phase == S_READ);
  assign rd_en     = (phase == S_READ);
  assign rd_col    = idx;
  assign iter_tick = (phase == S_SENSE) && last_pbit;
  assign busy      = (phase != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase        <= S_IDLE;
      idx          <= '0;
      iter_cnt     <= '0;
      state        <= '0;
      sample_valid <= 1'b0;
      done         <= 1'b0;
    end else begin
      sample_valid <= iter_tick;
      done         <= iter_tick && last_iter;
      unique case (phase)
        S_IDLE: begin
          if (start) begin
            state    <= '0;
            idx      <= '0;
            iter_cnt <= '0;
            phase    <= S_DRAW;
          end
        end
        S_DRAW:  phase <= S_READ;
        S_READ:  phase <= S_SENSE;
        S_SENSE: begin
          state[idx] <= s;
          if (!last_pbit) begin
            idx   <= idx + 1'b1;
            phase <= S_DRAW;
          end else begin
            idx      <= '0;
            iter_cnt <= iter_cnt + 1'b1;
            phase    <= last_iter ? S_IDLE : S_DRAW;
          end
        end
        default: phase <= S_IDLE;
      endcase
    end
  end

  a_npbits_legal: assert property (@(posedge clk) disable iff (!rst_n)
    (phase == S_IDLE && start) |-> (n_pbits != '0 && 32'(n_pbits) <= N_BLP && n_iters != '0));

endmodule
