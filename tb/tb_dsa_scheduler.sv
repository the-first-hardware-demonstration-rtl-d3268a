// tb_dsa_scheduler -- self-check of the dynamic slope annealing schedule.
//
// Runs a DSA schedule (sigma0 = 0.5 = 128 in Q4.8, -3 every 5 iterations) and
// compares sigma after every iteration tick with the closed form
// max(0, sigma0 - dec * floor(k / step)). Then checks the constant-sigma mode
// (dsa_en low), a step of one iteration, and that start reloads sigma0.
module tb_dsa_scheduler;
  import pcomp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, iter_tick = 1'b0, dsa_en = 1'b0;
  logic [SIGMA_W-1:0] sigma0 = '0, sigma_dec = '0, sigma;
  logic [15:0] step_iters = '0;
  logic anneal_step;
  int checks = 0, failures = 0, n_steps = 0;

  dsa_scheduler dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (anneal_step) n_steps++;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int s0, int dec, int step, bit en, int iters);
    @(negedge clk);
    sigma0 = SIGMA_W'(s0); sigma_dec = SIGMA_W'(dec); step_iters = 16'(step); dsa_en = en;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    checks++;
    if (int'(sigma) != s0) failures++;
    for (int k = 1; k <= iters; k++) begin
      int exp_s;
      // a few idle cycles between iterations
      repeat ($urandom_range(0, 3)) @(negedge clk);
      iter_tick = 1'b1;
      @(negedge clk);
      iter_tick = 1'b0;
      if (!en) exp_s = s0;
      else begin
        exp_s = s0 - dec * (k / ((step == 0) ? 1 : step));
        if (exp_s < 0) exp_s = 0;
      end
      checks++;
      if (int'(sigma) != exp_s) begin
        failures++;
        $display("FAIL iter %0d: sigma %0d expected %0d", k, sigma, exp_s);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(128, 3, 5, 1'b1, 250);
    checks++;
    if (n_steps != 43) begin   // 128 = 42*3 + 2: 43 steps reach 0
      failures++;
      $display("FAIL anneal steps %0d", n_steps);
    end
    run(512, 7, 3, 1'b0, 60);
    run(100, 1, 1, 1'b1, 120);
    run(300, 50, 0, 1'b1, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
