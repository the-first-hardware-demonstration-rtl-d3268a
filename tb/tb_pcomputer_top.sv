// tb_pcomputer_top -- end-to-end test of the p-computer at its full size
// (1152 wordlines, 512 bitline pairs), solving the 42-node lipoprotein /
// LolCDE-LolA docking problem as a maximum weighted clique problem.
//
// The problem and its mapping onto the array (42*18 + 7 + 36 = 799 of the
// 1152 rows, 42 of the 512 bitline pairs) are described in docking_pkg.
// Trials: constant sigma = 0.5, DSA from 0.5 to 0 (1000 iterations each), and
// a short high-noise trial at sigma = 2.0.
// Checks, at every read: the sensed MAC equals h_i - 18*(conflicting selected
// neighbours) - u, computed here from the state and u; the written p-bit
// equals (MAC >= 0). At every sample: the configuration is a clique and no
// p-bit beyond the 42 is set. Per trial: 3*42*iterations cycles; after DSA the
// final state is a maximal clique (a fixed point at sigma = 0) and the mode
// is a clique. Mechanisms counted (each must occur): positive and negative
// random bias, sense ties, penalty rejections, up and down flips, anneal
// steps, constant-sigma mode, mode-table evictions.
module tb_pcomputer_top;
  import pcomp_pkg::*;
  import docking_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cell_we = 1'b0, map_we = 1'b0, dsa_en = 1'b0, seed_load = 1'b0, start = 1'b0;
  logic [10:0] cell_row = '0, map_addr = '0;
  logic [8:0]  cell_col = '0;
  cell_pair_t  cell_val = CELL_ZERO;
  wl_map_t     map_data = '{src: SRC_OFF, idx: '0};
  logic [9:0]  n_pbits = '0;
  logic [15:0] n_iters = '0, dsa_step_iters = '0, iter_cnt;
  logic [SIGMA_W-1:0] sigma0 = '0, dsa_sigma_dec = '0, sigma;
  logic [127:0] seed = '0;
  logic busy, done, sample_valid, anneal_step;
  logic [511:0] state, mode_state;
  logic signed [U_W-1:0] u;
  logic signed [11:0] mac_diff;
  logic [15:0] mode_count, mode_err, evictions;

  pcomputer_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_bias_pos = 0, n_bias_neg = 0, n_tie = 0, n_reject = 0, n_up = 0, n_down = 0;
  int n_anneal = 0, n_const_trials = 0, n_evict = 0;

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- programming (problem tables in docking_pkg) ----------------------
  task automatic wr_map(int r, wl_map_t m);
    @(negedge clk);
    map_we = 1'b1; map_addr = 11'(r); map_data = m;
    @(negedge clk);
    map_we = 1'b0;
  endtask

  task automatic program_problem();
    for (int r = 0; r < ROWS_USED; r++) wr_map(r, row_map(r));
    @(negedge clk);
    for (int c = 0; c < NV; c++) begin
      for (int r = 0; r < ROWS_USED; r++) begin
        cell_we = 1'b1; cell_row = 11'(r); cell_col = 9'(c); cell_val = cell_of(r, c);
        @(negedge clk);
      end
    end
    cell_we = 1'b0;
  endtask

  // ---- read / sample monitor (negedge sampling) --------------------------
  int  exp_mac, exp_col, stage = 0;
  bit  in_trial = 0;
  int  samples;
  always @(negedge clk) if (in_trial) begin
    if (stage == 2) begin                 // after the sense edge: written p-bit
      checks++;
      if (state[exp_col] !== (exp_mac >= 0)) begin
        failures++;
        $display("FAIL p-bit %0d written %0b, MAC %0d", exp_col + 1, state[exp_col], exp_mac);
      end
      stage = 0;
    end
    if (stage == 1) begin                 // sense cycle: MAC of the pair
      checks++;
      if (int'(mac_diff) != exp_mac) begin
        failures++;
        $display("FAIL MAC p-bit %0d: got %0d expected %0d", exp_col + 1, mac_diff, exp_mac);
      end
      if (exp_mac == 0) n_tie++;
      stage = 2;
    end
    if (dut.rd_en) begin                  // read cycle: expected MAC
      int c;
      exp_col = int'(dut.rd_col);
      c = conflicts(exp_col, state);
      exp_mac = h(exp_col) - PEN * c - int'(u);
      if (u > 0) n_bias_neg++;
      if (u < 0) n_bias_pos++;
      if (c > 0 && h(exp_col) - int'(u) >= 0) n_reject++;
      if (state[exp_col] && exp_mac < 0) n_down++;
      if (!state[exp_col] && exp_mac >= 0) n_up++;
      stage = 1;
    end
    if (sample_valid) begin
      samples++;
      checks++;
      if (!is_clique(state)) begin
        failures++;
        $display("FAIL sample %0d is not a clique:%s", samples, members(state));
      end
    end
    if (anneal_step) n_anneal++;
  end

  task automatic run_trial(string name, int s0, bit dsa, int step, int dec, int iters,
                           logic [127:0] sd);
    int cycles;
    @(negedge clk);
    seed = sd; seed_load = 1'b1;
    @(negedge clk);
    seed_load = 1'b0;
    n_pbits = 10'(NV); n_iters = 16'(iters); sigma0 = SIGMA_W'(s0); dsa_en = dsa;
    dsa_step_iters = 16'(step); dsa_sigma_dec = SIGMA_W'(dec);
    samples = 0; in_trial = 1;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    @(negedge clk);
    @(negedge clk);
    in_trial = 0;
    checks++;
    if (cycles != 3 * NV * iters || samples != iters) begin
      failures++;
      $display("FAIL %s: %0d cycles (expected %0d), %0d samples", name, cycles, 3 * NV * iters, samples);
    end
    checks++;
    if (!is_clique(mode_state) || mode_count == 0) begin
      failures++;
      $display("FAIL %s: mode is not a clique:%s", name, members(mode_state));
    end
    if (!dsa) n_const_trials++;
    n_evict += int'(evictions);
    $display("%s: mode {%s } weight %0d.%04d seen %0d (err %0d) of %0d; final {%s } sigma %0d/256",
             name, members(mode_state), weight4(mode_state) / 10000, weight4(mode_state) % 10000,
             mode_count, mode_err, iters, members(state), sigma);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    program_problem();

    run_trial("sigma=0.5 constant", 128, 1'b0, 0, 0, 1000, 128'h1);
    // DSA 0.5 -> 0: -1/256 every 7 iterations, sigma reaches 0 at iteration 896
    n_anneal = 0;
    run_trial("DSA 0.5->0", 128, 1'b1, 7, 1, 1000, 128'h2);
    checks++;
    if (sigma != 0 || n_anneal != 128) begin
      failures++;
      $display("FAIL DSA: final sigma %0d, %0d anneal steps", sigma, n_anneal);
    end
    // after the sigma = 0 tail the state is a fixed point: a maximal clique
    for (int i = 0; i < NV; i++) begin
      checks++;
      if (state[i] != (conflicts(i, state) == 0)) begin
        failures++;
        $display("FAIL DSA final state not maximal at vertex %0d", i + 1);
      end
    end
    run_trial("sigma=2.0 constant", 512, 1'b0, 0, 0, 200, 128'h3);

    $display("mechanisms: +bias %0d, -bias %0d, ties %0d, penalty rejections %0d, flips up %0d down %0d, anneal steps %0d, constant-sigma trials %0d, evictions %0d",
             n_bias_pos, n_bias_neg, n_tie, n_reject, n_up, n_down, n_anneal, n_const_trials, n_evict);
    if (n_bias_pos == 0) begin failures++; $display("FAIL never: positive bias"); end
    if (n_bias_neg == 0) begin failures++; $display("FAIL never: negative bias"); end
    if (n_tie == 0)      begin failures++; $display("FAIL never: sense tie"); end
    if (n_reject == 0)   begin failures++; $display("FAIL never: penalty rejection"); end
    if (n_up == 0 || n_down == 0) begin failures++; $display("FAIL never: flips"); end
    if (n_anneal == 0)   begin failures++; $display("FAIL never: anneal step"); end
    if (n_const_trials == 0) begin failures++; $display("FAIL never: constant sigma"); end
    if (n_evict == 0)    begin failures++; $display("FAIL never: mode-table eviction"); end
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
