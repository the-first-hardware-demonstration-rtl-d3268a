// tb_pbit_update_ctrl -- self-check of the sequential p-bit update controller.
//
// The testbench plays the data path: when the controller reads a bitline pair
// it returns, in the sense cycle, a decision that depends on the current state
// (parity of the state masked by a per-column pattern) and on a random bit.
// A reference state updated the same way is compared with the controller's
// state at every sample. Checks: p-bits are read in index order 0..n-1, one
// RNG draw precedes every read, each iteration ends with exactly one sample,
// iter_cnt counts completed iterations, and a trial of n p-bits and I
// iterations takes 3*n*I cycles after the start cycle (three cycles per
// update). A second trial checks that start clears the state.
module tb_pbit_update_ctrl;
  localparam int unsigned N_BLP = 8;
  localparam int unsigned COL_W = $clog2(N_BLP);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, s = 1'b0;
  logic [COL_W:0] n_pbits = '0;
  logic [15:0] n_iters = '0;
  logic rng_en, wl_drive, rd_en, iter_tick, sample_valid, busy, done;
  logic [COL_W-1:0] rd_col;
  logic [N_BLP-1:0] state;
  logic [15:0] iter_cnt;

  int checks = 0, failures = 0;
  logic [N_BLP-1:0] ref_state, mask [N_BLP];
  int exp_col, samples, draws_since_read, cycles;
  bit pending;
  logic pend_val;

  pbit_update_ctrl #(.N_BLP(N_BLP)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // data-path model: decide at the read, present s in the sense cycle
  always @(posedge clk) if (rst_n) begin
    if (rng_en) draws_since_read++;
    if (pending) begin
      ref_state[exp_col] = pend_val;
      exp_col = (exp_col + 1) % int'(n_pbits);
      pending = 0;
    end
    if (rd_en) begin
      checks++;
      if (int'(rd_col) != exp_col || draws_since_read != 1 || !wl_drive) begin
        failures++;
        $display("FAIL read col %0d expected %0d draws %0d", rd_col, exp_col, draws_since_read);
      end
      draws_since_read = 0;
      pend_val = (^(ref_state & mask[exp_col])) ^ 1'($urandom_range(0, 3) == 0);
      pending = 1;
    end
    if (sample_valid) begin
      samples++;
      checks++;
      if (state !== ref_state || int'(iter_cnt) != samples) begin
        failures++;
        $display("FAIL sample %0d: state %b expected %b iter_cnt %0d", samples, state, ref_state, iter_cnt);
      end
    end
  end
  always @(negedge clk) s = pend_val;

  task automatic trial(int n, int iters);
    @(negedge clk);
    n_pbits = (COL_W+1)'(n); n_iters = 16'(iters);
    ref_state = '0; exp_col = 0; samples = 0; draws_since_read = 0; pending = 0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    @(negedge clk);   // the monitor has seen the last sample by now
    checks++;
    if (cycles != 3 * n * iters || samples != iters) begin
      failures++;
      $display("FAIL trial n=%0d iters=%0d: %0d cycles, %0d samples", n, iters, cycles, samples);
    end
    @(negedge clk);
    checks++;
    if (busy || done) failures++;
  endtask

  initial begin
    for (int c = 0; c < N_BLP; c++) mask[c] = N_BLP'($urandom()) & ~(N_BLP'(1) << c) | N_BLP'(1) << ((c + 1) % N_BLP);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    trial(8, 50);
    trial(5, 20);
    trial(1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
