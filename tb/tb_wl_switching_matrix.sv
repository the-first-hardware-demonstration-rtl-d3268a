// tb_wl_switching_matrix -- self-checking test of the wordline switching matrix.
//
// Loads a random wordline map (p-bit rows, always-on rows, positive and
// negative bias rows, unused rows) into a small matrix, then applies random
// p-bit states and random thresholds u in [-20, 20]. The expected wordlines
// are computed from the testbench's own copy of the map: a p-bit row follows
// its p-bit, bias row k of the negative region is on when k < u and of the
// positive region when k < -u, and nothing is on when drive is low. Also
// checks that reset clears the map.
module tb_wl_switching_matrix;
  import pcomp_pkg::*;

  localparam int unsigned N_WL  = 48;
  localparam int unsigned N_BLP = 8;
  localparam int unsigned ROW_W = $clog2(N_WL);

  logic clk = 1'b0, rst_n = 1'b0;
  logic map_we = 1'b0, drive = 1'b0;
  logic [ROW_W-1:0] map_addr = '0;
  wl_map_t map_data = '{src: SRC_OFF, idx: '0};
  logic [N_BLP-1:0] state = '0;
  logic signed [U_W-1:0] u = '0;
  logic [N_WL-1:0] wl;

  int checks = 0, failures = 0;
  wl_map_t ref_map [N_WL];
  int n_pos_rows_on = 0, n_neg_rows_on = 0;

  wl_switching_matrix #(.N_WL(N_WL), .N_BLP(N_BLP)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic expected(int r);
    int k;
    k = int'(ref_map[r].idx);
    if (!drive) return 1'b0;
    case (ref_map[r].src)
      SRC_ON:       return 1'b1;
      SRC_PBIT:     return (k < N_BLP) ? state[k] : 1'b0;
      SRC_BIAS_POS: return k < -int'(u);
      SRC_BIAS_NEG: return k < int'(u);
      default:      return 1'b0;
    endcase
  endfunction

  task automatic check_all();
    #1;
    for (int r = 0; r < N_WL; r++) begin
      checks++;
      if (wl[r] !== expected(r)) begin
        failures++;
        $display("FAIL row %0d src %0d idx %0d u %0d: wl %0b", r, ref_map[r].src, ref_map[r].idx, u, wl[r]);
      end
      if (wl[r] && ref_map[r].src == SRC_BIAS_POS) n_pos_rows_on++;
      if (wl[r] && ref_map[r].src == SRC_BIAS_NEG) n_neg_rows_on++;
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < N_WL; r++) ref_map[r] = '{src: SRC_OFF, idx: '0};
    // after reset every row is off, even when driven
    drive = 1'b1; state = '1; u = 5;
    check_all();
    drive = 1'b0;
    for (int r = 0; r < N_WL; r++) begin
      wl_map_t m;
      case ($urandom_range(0, 5))
        0: m = '{src: SRC_OFF,      idx: MAP_IDX_W'($urandom_range(0, 20))};
        1: m = '{src: SRC_ON,       idx: '0};
        2, 3: m = '{src: SRC_PBIT,  idx: MAP_IDX_W'($urandom_range(0, N_BLP))};
        4: m = '{src: SRC_BIAS_POS, idx: MAP_IDX_W'($urandom_range(0, 19))};
        default: m = '{src: SRC_BIAS_NEG, idx: MAP_IDX_W'($urandom_range(0, 19))};
      endcase
      @(negedge clk);
      map_we = 1'b1; map_addr = ROW_W'(r); map_data = m; ref_map[r] = m;
    end
    @(negedge clk);
    map_we = 1'b0;
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      drive = ($urandom_range(0, 7) != 0);
      state = N_BLP'($urandom());
      u     = U_W'($urandom_range(0, 40) - 20);
      check_all();
    end
    checks++;
    if (n_pos_rows_on == 0 || n_neg_rows_on == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
