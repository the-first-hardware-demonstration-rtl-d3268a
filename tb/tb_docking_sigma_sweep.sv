// tb_docking_sigma_sweep -- the 42-node docking problem at every stochasticity
// level evaluated for the chip: constant sigma = 2.0, 1.5, 1.0, 0.5, 0.2 and
// dynamic slope annealing from each of these values to 0. Each setting runs
// TRIALS trials of 1000 iterations with different RNG seeds; a trial succeeds
// when its most frequently occupied configuration has the optimum weight
// 0.8702. (With the two-decimal distance tables there are two such cliques,
// {1 9 17 25 41} and {1 9 17 32 41}.) Success counts are printed per setting.
// Checks: every sampled configuration is a clique (the penalty P = 18 keeps
// the sampler inside the feasible set), every trial output is a clique, each
// trial takes 3*42*1000 cycles, and after annealing to sigma = 0 the final
// state is a maximal clique.
module tb_docking_sigma_sweep;
  import pcomp_pkg::*;
  import docking_pkg::*;

  localparam int TRIALS = 3, ITERS = 1000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cell_we = 1'b0, map_we = 1'b0, dsa_en = 1'b0, seed_load = 1'b0, start = 1'b0;
  logic [10:0] cell_row = '0, map_addr = '0;
  logic [8:0]  cell_col = '0;
  cell_pair_t  cell_val = CELL_ZERO;
  wl_map_t     map_data = '{src: SRC_OFF, idx: '0};
  logic [9:0]  n_pbits = 10'(NV);
  logic [15:0] n_iters = 16'(ITERS), dsa_step_iters = '0, iter_cnt;
  logic [SIGMA_W-1:0] sigma0 = '0, dsa_sigma_dec = '0, sigma;
  logic [127:0] seed = '0;
  logic busy, done, sample_valid, anneal_step;
  logic [511:0] state, mode_state;
  logic signed [U_W-1:0] u;
  logic signed [11:0] mac_diff;
  logic [15:0] mode_count, mode_err, evictions;

  pcomputer_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, bad_samples = 0, samples = 0;

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (sample_valid) begin
    samples++;
    if (!is_clique(state)) bad_samples++;
  end

  initial begin
    int sig [5] = '{512, 384, 256, 128, 51};   // 2.0 1.5 1.0 0.5 0.2 in Q4.8
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < ROWS_USED; r++) begin
      @(negedge clk);
      map_we = 1'b1; map_addr = 11'(r); map_data = row_map(r);
    end
    @(negedge clk);
    map_we = 1'b0;
    for (int c = 0; c < NV; c++)
      for (int r = 0; r < ROWS_USED; r++) begin
        cell_we = 1'b1; cell_row = 11'(r); cell_col = 9'(c); cell_val = cell_of(r, c);
        @(negedge clk);
      end
    cell_we = 1'b0;

    for (int dsa = 0; dsa < 2; dsa++) begin
      foreach (sig[si]) begin
        int wins;
        string outs;
        wins = 0;
        outs = "";
        for (int t = 0; t < TRIALS; t++) begin
          int cycles;
          cycles = 0;
          @(negedge clk);
          seed = 128'(1000 * dsa + 10 * si + t + 1); seed_load = 1'b1;
          @(negedge clk);
          seed_load = 1'b0;
          sigma0 = SIGMA_W'(sig[si]); dsa_en = dsa[0];
          // anneal to 0 in 128 steps of 7 iterations (by iteration 896)
          dsa_step_iters = 16'd7; dsa_sigma_dec = SIGMA_W'((sig[si] + 127) / 128);
          samples = 0; bad_samples = 0;
          start = 1'b1;
          @(negedge clk);
          start = 1'b0;
          while (!done) begin
            @(negedge clk);
            cycles++;
          end
          @(negedge clk);
          checks++;
          if (cycles != 3 * NV * ITERS || samples != ITERS || bad_samples != 0 || !is_clique(mode_state)) begin
            failures++;
            $display("FAIL trial: %0d cycles, %0d samples, %0d non-clique samples, mode {%s }",
                     cycles, samples, bad_samples, members(mode_state));
          end
          if (dsa == 1) begin
            checks++;
            for (int i = 0; i < NV; i++)
              if (state[i] != (conflicts(i, state) == 0)) begin
                failures++;
                $display("FAIL annealed state not maximal at vertex %0d", i + 1);
                break;
              end
          end
          if (weight4(mode_state) == MWC_W4) wins++;
          outs = {outs, " {", members(mode_state), " }"};
        end
        $display("%s sigma %4.2f: optimum in %0d of %0d trials;%s", dsa ? "DSA from" : "constant",
                 real'(sig[si]) / 256.0, wins, TRIALS, outs);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
