// tb_csa -- exhaustive self-check of the bitline-pair sense amplifier.
//
// Applies every pair of 6-bit bitline counts and checks the decision
// (1 when the left current is at least the right one, so a tie gives 1 as in
// the rule s_in >= u) and the signed difference.
module tb_csa;
  localparam int unsigned CNT_W = 6;
  logic [CNT_W-1:0] i_left, i_right;
  logic s;
  logic signed [CNT_W:0] diff;
  int checks = 0, failures = 0;

  csa #(.CNT_W(CNT_W)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < (1 << CNT_W); a++) begin
      for (int b = 0; b < (1 << CNT_W); b++) begin
        i_left = CNT_W'(a); i_right = CNT_W'(b);
        #1;
        checks++;
        if (s !== (a >= b) || int'(diff) != a - b) begin
          failures++;
          $display("FAIL %0d vs %0d: s %0b diff %0d", a, b, s, diff);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
