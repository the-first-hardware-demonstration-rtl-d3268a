// tb_rram_cim_array -- self-checking test of the RRAM CIM array model.
//
// Programs every cell pair of a small array with random values (none, left,
// right, both formed), then performs random reads: random wordline patterns on
// random bitline pairs. The expected bitline counts come from a reference copy
// of the cell contents kept by the testbench. Checks the counts, the
// one-cycle read latency (rd_valid) and that rewriting a cell changes the sum.
module tb_rram_cim_array;
  import pcomp_pkg::*;

  localparam int unsigned N_WL  = 40;
  localparam int unsigned N_BLP = 6;
  localparam int unsigned ROW_W = $clog2(N_WL);
  localparam int unsigned COL_W = $clog2(N_BLP);
  localparam int unsigned CNT_W = $clog2(N_WL + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, rd_en = 1'b0, rd_valid;
  logic [ROW_W-1:0] wr_row = '0;
  logic [COL_W-1:0] wr_col = '0, rd_col = '0;
  cell_pair_t wr_cell = CELL_ZERO;
  logic [N_WL-1:0] wl = '0;
  logic [CNT_W-1:0] cnt_l, cnt_r;

  int checks = 0, failures = 0;
  bit ref_l [N_BLP][N_WL];
  bit ref_r [N_BLP][N_WL];

  rram_cim_array #(.N_WL(N_WL), .N_BLP(N_BLP)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_cell(int r, int c, cell_pair_t v);
    @(negedge clk);
    wr_en = 1'b1; wr_row = ROW_W'(r); wr_col = COL_W'(c); wr_cell = v;
    ref_l[c][r] = v[0];
    ref_r[c][r] = v[1];
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic read_check(int c, logic [N_WL-1:0] pattern);
    int el, er;
    el = 0; er = 0;
    for (int r = 0; r < N_WL; r++) begin
      el += int'(pattern[r] & ref_l[c][r]);
      er += int'(pattern[r] & ref_r[c][r]);
    end
    @(negedge clk);
    rd_en = 1'b1; rd_col = COL_W'(c); wl = pattern;
    @(negedge clk);
    rd_en = 1'b0; wl = '0;
    checks++;
    if (!rd_valid || int'(cnt_l) != el || int'(cnt_r) != er) begin
      failures++;
      $display("FAIL col %0d: got %0d/%0d valid %0b, expected %0d/%0d", c, cnt_l, cnt_r, rd_valid, el, er);
    end
    // counts are held until the next read
    @(negedge clk);
    checks++;
    if (rd_valid || int'(cnt_l) != el) failures++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < N_BLP; c++)
      for (int r = 0; r < N_WL; r++)
        write_cell(r, c, cell_pair_t'($urandom_range(0, 3)));
    // all rows on: the full column sums
    for (int c = 0; c < N_BLP; c++) read_check(c, '1);
    for (int k = 0; k < 300; k++) begin
      logic [N_WL-1:0] p;
      for (int r = 0; r < N_WL; r++) p[r] = 1'($urandom_range(0, 1));
      read_check($urandom_range(0, N_BLP - 1), p);
    end
    // rewrite: a single formed left cell on an otherwise empty column
    for (int r = 0; r < N_WL; r++) write_cell(r, 2, CELL_ZERO);
    write_cell(7, 2, CELL_POS);
    read_check(2, '1);
    write_cell(7, 2, CELL_NEG);
    read_check(2, '1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
