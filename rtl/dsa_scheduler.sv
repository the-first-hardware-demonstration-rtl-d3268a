// dsa_scheduler -- dynamic slope annealing (DSA) schedule for the RNG sigma.
//
// DSA anneals the p-computer by narrowing the Gaussian threshold distribution:
// the standard deviation sigma of every p-bit's RNG is lowered globally during
// a trial, from an initial value to 0, which steepens the p-bits' sigmoid from
// exploratory to nearly deterministic. (Classical simulated annealing instead
// scales the couplings.) The published schedule goes from sigma = 0.5 to 0 over
// a 1000-iteration trial; its exact shape is not given, so this block uses a
// linear staircase: every step_iters iterations sigma drops by sigma_dec, and
// it stops at 0. With dsa_en low sigma stays at sigma0 (constant
// stochasticity mode).
//
// Interface / timing: start loads sigma0 and clears the iteration counter.
// iter_tick marks the end of one iteration (a sweep over all p-bits); the
// lowered sigma is visible the cycle after the tick that completes a step, and
// anneal_step pulses in that cycle. sigma is unsigned Q4.8 (256 = 1.0).
module dsa_scheduler
  import pcomp_pkg::*;
#(
  parameter int unsigned ITER_W = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               iter_tick,
  input  logic               dsa_en,
  input  logic [SIGMA_W-1:0] sigma0,
  input  logic [ITER_W-1:0]  step_iters,
  input  logic [SIGMA_W-1:0] sigma_dec,
  output logic [SIGMA_W-1:0] sigma,
  output logic               anneal_step
);

  logic [ITER_W-1:0] cnt;
  logic              step_done;

  assign step_done = dsa_en && iter_tick &&
                     ((step_iters == '0) || (cnt == step_iters - 1'b1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sigma       <= '0;
      cnt         <= '0;
      anneal_step <= 1'b0;
    end else begin
      anneal_step <= 1'b0;
      if (start) begin
        sigma <= sigma0;
        cnt   <= '0;
      end else if (step_done) begin
        cnt         <= '0;
        sigma       <= (sigma > sigma_dec) ? sigma - sigma_dec : '0;
        anneal_step <= (sigma != '0);
      end else if (dsa_en && iter_tick) begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
