// tb_gaussian_rng -- statistical self-check of the Gaussian threshold generator.
//
// Draws thousands of thresholds at several sigma values and compares sample
// statistics with those of a rounded normal variable round(sigma * z):
//   sigma = 0    : every u is 0;
//   sigma = 0.5  : P(u = 0) = P(|z| < 1) = 0.683;
//   sigma = 1.0  : mean 0, E[u^2] = 1.083 (rounding adds about 1/12);
//   sigma = 2.0  : E[u^2] = 4.08, P(u = 0) = P(|z| < 0.25) = 0.197;
//   sigma = 16   : u is clipped to +-18 and reaches both limits.
// Also checks the one-cycle u_valid latency and that reloading a seed repeats
// the sequence.
module tb_gaussian_rng;
  import pcomp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic seed_load = 1'b0, en = 1'b0;
  logic [127:0] seed = '0;
  logic [SIGMA_W-1:0] sigma = '0;
  logic signed [U_W-1:0] u;
  logic u_valid;

  int checks = 0, failures = 0;

  gaussian_rng dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // draw n values at sigma s; returns mean, mean square, fraction of zeros, min, max
  task automatic draw(int n, int s, output real mean, output real msq, output real pz,
                      output int umin, output int umax);
    real sum, sq;
    int zeros;
    sum = 0; sq = 0; zeros = 0; umin = 1000; umax = -1000;
    @(negedge clk);
    sigma = SIGMA_W'(s);
    for (int k = 0; k < n; k++) begin
      en = 1'b1;
      @(negedge clk);
      if (!u_valid) begin
        failures++;
        checks++;
      end
      sum += real'(u);
      sq  += real'(u) * real'(u);
      if (u == 0) zeros++;
      if (int'(u) < umin) umin = int'(u);
      if (int'(u) > umax) umax = int'(u);
    end
    en = 1'b0;
    @(negedge clk);
    check(!u_valid, "u_valid not cleared");
    mean = sum / n; msq = sq / n; pz = real'(zeros) / n;
  endtask

  initial begin
    real m, q, z;
    int lo, hi;
    int seq_a [16];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    draw(500, 0, m, q, z, lo, hi);
    check(lo == 0 && hi == 0, "sigma 0 not deterministic");

    draw(20000, 128, m, q, z, lo, hi);
    $display("sigma 0.5: mean %f msq %f p0 %f", m, q, z);
    check(z > 0.66 && z < 0.71, "sigma 0.5 P(u=0)");
    check(m > -0.03 && m < 0.03, "sigma 0.5 mean");

    draw(20000, 256, m, q, z, lo, hi);
    $display("sigma 1.0: mean %f msq %f p0 %f", m, q, z);
    check(m > -0.05 && m < 0.05, "sigma 1 mean");
    check(q > 1.00 && q < 1.17, "sigma 1 variance");

    draw(20000, 512, m, q, z, lo, hi);
    $display("sigma 2.0: mean %f msq %f p0 %f", m, q, z);
    check(q > 3.8 && q < 4.4, "sigma 2 variance");
    check(z > 0.18 && z < 0.215, "sigma 2 P(u=0)");

    draw(5000, 4095, m, q, z, lo, hi);
    $display("sigma 16: min %0d max %0d", lo, hi);
    check(lo == -18 && hi == 18, "clipping to +-18");

    // reproducibility of a seeded sequence
    @(negedge clk);
    sigma = SIGMA_W'(512);
    seed = 128'h0123_4567_89ab_cdef_fedc_ba98_7654_3210;
    seed_load = 1'b1;
    @(negedge clk);
    seed_load = 1'b0;
    for (int k = 0; k < 16; k++) begin
      en = 1'b1; @(negedge clk); seq_a[k] = int'(u);
    end
    en = 1'b0;
    seed_load = 1'b1;
    @(negedge clk);
    seed_load = 1'b0;
    for (int k = 0; k < 16; k++) begin
      en = 1'b1; @(negedge clk);
      check(int'(u) == seq_a[k], "seeded sequence repeats");
    end
    en = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
