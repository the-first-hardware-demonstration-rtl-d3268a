// tb_pbit_sigmoid -- transfer curve of one artificial p-bit on the full chip.
//
// Reproduces the single p-bit characterisation: the probability that the
// p-bit outputs 1 as a function of its MAC input, for sigma = 0, 0.2, 0.5, 1,
// 1.5 and 2. One p-bit (bitline pair 0) is given a static input m in -8..8 by
// m always-on rows holding +1 (or -m rows holding -1) cell pairs, plus the
// 18 + 18 random-bias rows. Each trial of 600 iterations updates the p-bit 600
// times; the fraction of ones is compared with the expected value for a
// rounded Gaussian threshold, P(u <= m) = Phi((m + 0.5) / sigma) (Phi the
// standard normal CDF; a step at m >= 0 for sigma = 0), within 0.07.
module tb_pbit_sigmoid;
  import pcomp_pkg::*;

  localparam int K = 600;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cell_we = 1'b0, map_we = 1'b0, dsa_en = 1'b0, seed_load = 1'b0, start = 1'b0;
  logic [10:0] cell_row = '0, map_addr = '0;
  logic [8:0]  cell_col = '0;
  cell_pair_t  cell_val = CELL_ZERO;
  wl_map_t     map_data = '{src: SRC_OFF, idx: '0};
  logic [9:0]  n_pbits = 10'd1;
  logic [15:0] n_iters = 16'(K), dsa_step_iters = '0, iter_cnt;
  logic [SIGMA_W-1:0] sigma0 = '0, dsa_sigma_dec = '0, sigma;
  logic [127:0] seed = '0;
  logic busy, done, sample_valid, anneal_step;
  logic [511:0] state, mode_state;
  logic signed [U_W-1:0] u;
  logic signed [11:0] mac_diff;
  logic [15:0] mode_count, mode_err, evictions;

  pcomputer_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, ones = 0;

  initial begin : watchdog
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (sample_valid && state[0]) ones++;

  // standard normal CDF via erf (Abramowitz & Stegun 7.1.26, |error| < 1.5e-7)
  function automatic real phi(real x);
    real z, t, y;
    z = ((x < 0) ? -x : x) / 1.4142135623730951;
    t = 1.0 / (1.0 + 0.3275911 * z);
    y = 1.0 - (((((1.061405429 * t - 1.453152027) * t) + 1.421413741) * t - 0.284496736) * t
               + 0.254829592) * t * $exp(-z * z);
    return (x < 0) ? 0.5 * (1.0 - y) : 0.5 * (1.0 + y);
  endfunction

  task automatic wr_map(int r, wl_src_e s, int idx);
    @(negedge clk);
    map_we = 1'b1; map_addr = 11'(r); map_data = '{src: s, idx: MAP_IDX_W'(idx)};
    @(negedge clk);
    map_we = 1'b0;
  endtask

  task automatic wr_cell(int r, cell_pair_t v);
    @(negedge clk);
    cell_we = 1'b1; cell_row = 11'(r); cell_col = '0; cell_val = v;
    @(negedge clk);
    cell_we = 1'b0;
  endtask

  initial begin
    int sig [6] = '{0, 51, 128, 256, 384, 512};   // 0, 0.2, 0.5, 1, 1.5, 2 in Q4.8
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 8; r++)  wr_map(r, SRC_ON, 0);
    for (int k = 0; k < 18; k++) begin
      wr_map(8 + k, SRC_BIAS_POS, k);
      wr_map(26 + k, SRC_BIAS_NEG, k);
      wr_cell(8 + k, CELL_POS);
      wr_cell(26 + k, CELL_NEG);
    end
    foreach (sig[si]) begin
      string line;
      line = $sformatf("sigma %4.2f:", real'(sig[si]) / 256.0);
      for (int m = -8; m <= 8; m++) begin
        real p, pe;
        for (int r = 0; r < 8; r++)
          wr_cell(r, (m > 0 && r < m) ? CELL_POS : (m < 0 && r < -m) ? CELL_NEG : CELL_ZERO);
        @(negedge clk);
        seed = 128'(si * 100 + m + 1000); seed_load = 1'b1;
        sigma0 = SIGMA_W'(sig[si]);
        @(negedge clk);
        seed_load = 1'b0;
        ones = 0;
        start = 1'b1;
        @(negedge clk);
        start = 1'b0;
        while (!done) @(negedge clk);
        @(negedge clk);
        p  = real'(ones) / K;
        pe = (sig[si] == 0) ? ((m >= 0) ? 1.0 : 0.0) : phi((m + 0.5) * 256.0 / sig[si]);
        line = {line, $sformatf(" %3.0f", 100.0 * p)};
        checks++;
        if (p - pe > 0.07 || pe - p > 0.07) begin
          failures++;
          $display("FAIL sigma %0d/256 MAC %0d: P(1) = %f expected %f", sig[si], m, p, pe);
        end
      end
      $display("%s  (%% ones for MAC -8..8)", line);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
