// rram_cim_array -- digital equivalent of the 1T1R binary RRAM compute-in-memory
// array of the p-computing chip.
//
// The array has N_WL wordlines and 2*N_BLP bitlines, grouped in N_BLP
// neighbouring pairs BL(i,1)/BL(i,2). A signed value is held by a pair of cells
// on one wordline: +1 forms the left cell, -1 forms the right cell, 0 leaves
// both un-formed (the mapping the chip uses). When wordlines are driven, each
// formed cell on an active row adds one unit of current to its bitline, so a
// bitline carries the count of its formed cells on active rows (the MAC). The
// analog current is represented here by that integer count; IR drop and
// device-to-device spread are not modelled (the chip is run at low V_WL where
// the current is linear in the number of rows).
//
// Only one p-bit is updated at a time, so only the pair being updated needs to
// be read: a read returns the two bitline counts of pair rd_col. Storage is
// column-major (one N_WL-bit word per bitline) so that a read is one word per
// bitline. Cells are non-volatile and have no reset; a cell is programmed with
// the write port (the digital effect of the write circuit, one cell pair per
// cycle).
//
// Interface / timing:
//   wr_en, wr_row, wr_col, wr_cell : write cell pair (wr_row, wr_col), 1 cycle.
//   rd_en, rd_col, wl              : sense pair rd_col with the wordlines wl.
//   cnt_l, cnt_r, rd_valid         : registered, valid the cycle after rd_en.
//
// Lint note: rst_n is both the asynchronous reset of the registers and the
// disable condition of this module's assertions, which a linter may report as
// a reset used both synchronously and asynchronously; the assertions are not
// logic, so the reset tree is unaffected.
module rram_cim_array
  import pcomp_pkg::*;
#(
  parameter int unsigned N_WL  = N_WL_DEF,
  parameter int unsigned N_BLP = N_BLP_DEF,
  localparam int unsigned ROW_W = $clog2(N_WL),
  localparam int unsigned COL_W = $clog2(N_BLP),
  localparam int unsigned CNT_W = $clog2(N_WL + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // programming
  input  logic              wr_en,
  input  logic [ROW_W-1:0]  wr_row,
  input  logic [COL_W-1:0]  wr_col,
  input  cell_pair_t        wr_cell,
  // compute (read) step
  input  logic              rd_en,
  input  logic [COL_W-1:0]  rd_col,
  input  logic [N_WL-1:0]   wl,
  output logic [CNT_W-1:0]  cnt_l,
  output logic [CNT_W-1:0]  cnt_r,
  output logic              rd_valid
);

  // one word per bitline; bit r is the cell on wordline r
  logic [N_WL-1:0] bl_left  [N_BLP];
  logic [N_WL-1:0] bl_right [N_BLP];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      bl_left [wr_col][wr_row] <= (wr_cell & CELL_POS) != CELL_ZERO;
      bl_right[wr_col][wr_row] <= (wr_cell & CELL_NEG) != CELL_ZERO;
    end
  end

  // bitline currents of the selected pair, in unit-cell currents
  logic [N_WL-1:0]  act_l, act_r;
  logic [CNT_W-1:0] sum_l, sum_r;

  always_comb begin
    act_l = bl_left [rd_col] & wl;
    act_r = bl_right[rd_col] & wl;
    sum_l = '0;
    sum_r = '0;
    for (int r = 0; r < N_WL; r++) begin
      sum_l = sum_l + CNT_W'(act_l[r]);
      sum_r = sum_r + CNT_W'(act_r[r]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_l    <= '0;
      cnt_r    <= '0;
      rd_valid <= 1'b0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) begin
        cnt_l <= sum_l;
        cnt_r <= sum_r;
      end
    end
  end

  // addresses must lie inside the array
  a_wr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> (32'(wr_row) < N_WL && 32'(wr_col) < N_BLP));
  a_rd_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> 32'(rd_col) < N_BLP);

endmodule
