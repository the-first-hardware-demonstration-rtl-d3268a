// pcomputer_top -- RRAM compute-in-memory probabilistic computer (p-computer).
//
// The chip solves QUBO / Ising-type problems by Gibbs sampling with p-bits on
// a discrete Hopfield network whose couplings are stored in an RRAM array:
//   x_i <- 1 if s_in = sum_j J_ij x_j + h_i >= u, else 0,
// with u an integer drawn from a Gaussian of standard deviation sigma.
// Data path of one p-bit update (see the blocks for details):
//   gaussian_rng        draws u with the current sigma;
//   wl_switching_matrix drives the wordlines from the p-bit states, the
//                       always-on static-bias rows and |u| rows of the
//                       positive or negative random-bias region;
//   rram_cim_array      sums the formed cells on the two bitlines of the
//                       updated p-bit's pair (the MAC, in unit currents);
//   csa                 compares the two bitline currents -> new x_i;
//   pbit_update_ctrl    sequences the updates p-bit by p-bit, iteration by
//                       iteration, and holds the state register;
//   dsa_scheduler       keeps sigma constant or anneals it to 0 (DSA);
//   mode_tracker        finds the trial's most frequently occupied state.
// The host (a microcontroller board on the published system) programs the
// cells and the wordline map, sets the trial, starts it and reads the results;
// its signals are this module's ports.
//
// Interface / timing: programming writes (cell_we, map_we) take one cycle each
// and are allowed only while busy is low. start begins a trial, which lasts
// 3 * n_pbits * n_iters cycles; sample_valid pulses once per iteration with the
// configuration in state; done pulses at the end, after which mode_state /
// mode_count give the trial's output. sigma values are unsigned Q4.8.
//
// Lint note: rst_n is both the asynchronous reset of the registers and the
// disable condition of this module's assertions, which a linter may report as
// a reset used both synchronously and asynchronously; the assertions are not
// logic, so the reset tree is unaffected.
module pcomputer_top
  import pcomp_pkg::*;
#(
  parameter int unsigned N_WL     = N_WL_DEF,
  parameter int unsigned N_BLP    = N_BLP_DEF,
  parameter int unsigned N_BIAS   = N_BIAS_DEF,
  parameter int unsigned ITER_W   = 16,
  parameter int unsigned MT_DEPTH = 32,
  localparam int unsigned ROW_W = $clog2(N_WL),
  localparam int unsigned COL_W = $clog2(N_BLP),
  localparam int unsigned CNT_W = $clog2(N_WL + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // programming: cell pairs of the RRAM array
  input  logic                  cell_we,
  input  logic [ROW_W-1:0]      cell_row,
  input  logic [COL_W-1:0]      cell_col,
  input  cell_pair_t            cell_val,
  // programming: wordline sources
  input  logic                  map_we,
  input  logic [ROW_W-1:0]      map_addr,
  input  wl_map_t               map_data,
  // trial set-up
  input  logic [COL_W:0]        n_pbits,
  input  logic [ITER_W-1:0]     n_iters,
  input  logic [SIGMA_W-1:0]    sigma0,
  input  logic                  dsa_en,
  input  logic [ITER_W-1:0]     dsa_step_iters,
  input  logic [SIGMA_W-1:0]    dsa_sigma_dec,
  input  logic                  seed_load,
  input  logic [127:0]          seed,
  input  logic                  start,
  // status and results
  output logic                  busy,
  output logic                  done,
  output logic [N_BLP-1:0]      state,
  output logic                  sample_valid,
  output logic [ITER_W-1:0]     iter_cnt,
  output logic [SIGMA_W-1:0]    sigma,
  output logic                  anneal_step,
  output logic signed [U_W-1:0] u,
  output logic signed [CNT_W:0] mac_diff,
  output logic [N_BLP-1:0]      mode_state,
  output logic [15:0]           mode_count,
  output logic [15:0]           mode_err,
  output logic [15:0]           evictions
);

  logic              rng_en, wl_drive, rd_en, rd_valid, s, iter_tick, u_valid;
  logic [COL_W-1:0]  rd_col;
  logic [N_WL-1:0]   wl;
  logic [CNT_W-1:0]  cnt_l, cnt_r;
  logic              trial_start;

  assign trial_start = start && !busy;

  pbit_update_ctrl #(.N_BLP(N_BLP), .ITER_W(ITER_W)) u_ctrl (
    .clk, .rst_n,
    .start        (trial_start),
    .n_pbits, .n_iters,
    .s,
    .rng_en, .wl_drive, .rd_en, .rd_col,
    .state, .iter_tick, .sample_valid, .iter_cnt,
    .busy, .done
  );

  dsa_scheduler #(.ITER_W(ITER_W)) u_dsa (
    .clk, .rst_n,
    .start       (trial_start),
    .iter_tick, .dsa_en, .sigma0,
    .step_iters  (dsa_step_iters),
    .sigma_dec   (dsa_sigma_dec),
    .sigma, .anneal_step
  );

  gaussian_rng #(.U_MAX(N_BIAS)) u_rng (
    .clk, .rst_n,
    .seed_load   (seed_load && !busy),
    .seed,
    .en          (rng_en),
    .sigma,
    .u, .u_valid
  );

  wl_switching_matrix #(.N_WL(N_WL), .N_BLP(N_BLP)) u_wlsm (
    .clk, .rst_n,
    .map_we      (map_we && !busy),
    .map_addr, .map_data,
    .drive       (wl_drive),
    .state, .u,
    .wl
  );

  rram_cim_array #(.N_WL(N_WL), .N_BLP(N_BLP)) u_array (
    .clk, .rst_n,
    .wr_en       (cell_we && !busy),
    .wr_row      (cell_row),
    .wr_col      (cell_col),
    .wr_cell     (cell_val),
    .rd_en, .rd_col, .wl,
    .cnt_l, .cnt_r, .rd_valid
  );

  csa #(.CNT_W(CNT_W)) u_csa (
    .i_left  (cnt_l),
    .i_right (cnt_r),
    .s,
    .diff    (mac_diff)
  );

  mode_tracker #(.W(N_BLP), .DEPTH(MT_DEPTH), .CNT_W(16)) u_mode (
    .clk, .rst_n,
    .clear        (trial_start),
    .sample_valid,
    .sample       (state),
    .mode_state, .mode_count, .mode_err, .evictions
  );

  // the sense result is taken in the cycle after the read
  a_sense_after_read: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |=> rd_valid);
  a_draw_before_read: assert property (@(posedge clk) disable iff (!rst_n)
    rng_en |=> u_valid);
  a_no_prog_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(cell_we || map_we));

endmodule
