// wl_switching_matrix -- drives the array's wordlines from the p-bit states and
// the Gaussian RNG value u.
//
// Every wordline has a programmable source (pcomp_pkg::wl_map_t), held in a
// map register file written once when a problem is loaded:
//   SRC_PBIT idx     : the row follows the output state of p-bit idx (the
//                      interconnection J cells of Fig. 2a). Giving several rows
//                      the same p-bit lets a coupling of magnitude m be stored
//                      as m binary cell pairs on a bitline pair.
//   SRC_ON           : the row is driven at every read (static bias h_i).
//   SRC_BIAS_POS idx : row idx of the positive in-array random bias region.
//   SRC_BIAS_NEG idx : row idx of the negative in-array random bias region.
//   SRC_OFF          : never driven.
// In-array random bias: the update rule is "x_i = 1 if s_in >= u". This is
// realised as s_in - u >= 0: for u > 0 the first u rows of the negative bias
// region are driven, for u < 0 the first |u| rows of the positive region, so
// the bias region adds -u to the MAC of every bitline pair. Its reach is
// limited to the number of bias rows programmed (18 of each polarity on the
// chip); the RNG clips u to that range.
//
// Interface / timing: map writes take one cycle (map_we/map_addr/map_data);
// the map resets to SRC_OFF. wl is combinational from state, u and drive;
// with drive low all wordlines are low.
//
// Lint note: rst_n is both the asynchronous reset of the registers and the
// disable condition of this module's assertions, which a linter may report as
// a reset used both synchronously and asynchronously; the assertions are not
// logic, so the reset tree is unaffected.
module wl_switching_matrix
  import pcomp_pkg::*;
#(
  parameter int unsigned N_WL  = N_WL_DEF,
  parameter int unsigned N_BLP = N_BLP_DEF,
  localparam int unsigned ROW_W = $clog2(N_WL),
  localparam int unsigned COL_W = $clog2(N_BLP)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                map_we,
  input  logic [ROW_W-1:0]    map_addr,
  input  wl_map_t             map_data,
  input  logic                drive,
  input  logic [N_BLP-1:0]    state,
  input  logic signed [U_W-1:0] u,
  output logic [N_WL-1:0]     wl
);

  wl_map_t map_q [N_WL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_WL; r++) map_q[r] <= '{src: SRC_OFF, idx: '0};
    end else if (map_we) begin
      map_q[map_addr] <= map_data;
    end
  end

  // number of bias rows of each polarity to drive
  logic [U_W-1:0] n_pos, n_neg;
  always_comb begin
    n_pos = '0;
    n_neg = '0;
    if (u < 0) n_pos = U_W'(-u);
    else       n_neg = U_W'(u);
  end

  always_comb begin
    for (int r = 0; r < N_WL; r++) begin
      unique case (map_q[r].src)
        SRC_ON:       wl[r] = drive;
        SRC_PBIT:     wl[r] = drive && (32'(map_q[r].idx) < N_BLP) && state[map_q[r].idx[COL_W-1:0]];
        SRC_BIAS_POS: wl[r] = drive && (32'(map_q[r].idx) < 32'(n_pos));
        SRC_BIAS_NEG: wl[r] = drive && (32'(map_q[r].idx) < 32'(n_neg));
        default:      wl[r] = 1'b0;
      endcase
    end
  end

  a_map_addr: assert property (@(posedge clk) disable iff (!rst_n)
    map_we |-> 32'(map_addr) < N_WL);

endmodule
