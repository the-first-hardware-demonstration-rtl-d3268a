// tb_mode_tracker -- self-check of the most-frequent-configuration tracker.
//
// Case 1: a shuffled stream with at most DEPTH distinct values; the mode and
// its count must be exact (error 0, no evictions). Case 2: a stream with many
// distinct values in which one value occurs 40 % of the time; that value must
// be reported, with its true count (counted by the testbench) inside
// [count - err, count], and evictions must have happened. Case 3: clear
// empties the table. Ties go to the lowest table entry, so case 1 uses
// distinct counts.
module tb_mode_tracker;
  localparam int unsigned W = 16, DEPTH = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 1'b0, sample_valid = 1'b0;
  logic [W-1:0] sample = '0, mode_state;
  logic [15:0] mode_count, mode_err, evictions;
  int checks = 0, failures = 0;

  mode_tracker #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: mode %h count %0d err %0d evictions %0d", what, mode_state, mode_count, mode_err, evictions);
    end
  endtask

  task automatic feed(logic [W-1:0] stream[$]);
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    foreach (stream[k]) begin
      sample_valid = 1'b1; sample = stream[k];
      @(negedge clk);
    end
    sample_valid = 1'b0;
    @(negedge clk);
  endtask

  initial begin
    logic [W-1:0] st[$];
    int true_cnt;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 10; trial++) begin
      logic [W-1:0] vals [4];
      int cnts [4];
      int best;
      st = {};
      best = 0;
      for (int v = 0; v < 4; v++) begin
        vals[v] = W'($urandom());
        cnts[v] = 5 + 7 * v + trial;   // distinct counts
      end
      vals[3] = vals[3] ^ W'(trial + 1);
      for (int v = 0; v < 4; v++) for (int k = 0; k < cnts[v]; k++) st.push_back(vals[v]);
      st.shuffle();
      best = 3;
      feed(st);
      check(mode_state == vals[best] && int'(mode_count) == cnts[best] && mode_err == 0 && evictions == 0,
            "exact mode");
    end
    // heavy hitter among many distinct values
    st = {};
    true_cnt = 0;
    for (int k = 0; k < 500; k++) begin
      if ($urandom_range(0, 99) < 40) begin
        st.push_back(16'hBEEF);
        true_cnt++;
      end else begin
        st.push_back(W'($urandom_range(0, 200)));
      end
    end
    feed(st);
    check(mode_state == 16'hBEEF, "heavy hitter reported");
    check(int'(mode_count) >= true_cnt && int'(mode_count) - int'(mode_err) <= true_cnt, "count bounds");
    check(evictions > 0, "evictions counted");
    st = {};
    feed(st);
    check(mode_count == 0 && evictions == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
