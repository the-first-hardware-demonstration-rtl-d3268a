// gaussian_rng -- integer Gaussian random threshold u with programmable sigma.
//
// The p-bit compares its input with a random integer threshold u drawn from a
// zero-mean Gaussian whose standard deviation sigma is set globally (and swept
// by dynamic slope annealing). How the chip makes its Gaussian numbers is not
// published; this block uses the simplest generator that does the job:
//   * a xorshift128 pseudo-random generator, stepped three times per draw,
//     gives 96 uniform bits = twelve uniform bytes b_k in 0..255;
//   * by the central limit theorem z = (sum b_k - 1530) / 256 is close to a
//     standard normal variable (mean 0, variance 65535/65536);
//   * u = round(z * sigma), with sigma an unsigned Q4.8 number, then clipped
//     to +-U_MAX, the number of rows in each polarity of the bias region.
// sigma = 0 gives u = 0 at every draw (a deterministic p-bit).
//
// Interface / timing: seed_load loads seed (a zero seed is replaced by a
// fixed non-zero constant). Each cycle with en high makes one draw; u is
// registered and u_valid pulses the cycle after en.
module gaussian_rng
  import pcomp_pkg::*;
#(
  parameter int unsigned U_MAX = N_BIAS_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  seed_load,
  input  logic [127:0]          seed,
  input  logic                  en,
  input  logic [SIGMA_W-1:0]    sigma,
  output logic signed [U_W-1:0] u,
  output logic                  u_valid
);

  localparam logic [127:0] SEED_DEF = 128'h2545F491_4F6CDD1D_9E3779B9_7F4A7C15;

  logic [31:0] sx, sy, sz, sw;   // xorshift128 state

  function automatic logic [31:0] xs_next(input logic [31:0] x, input logic [31:0] w);
    logic [31:0] t;
    t = x ^ (x << 11);
    return w ^ (w >> 19) ^ t ^ (t >> 8);
  endfunction

  // three steps: outputs o0, o1, o2 become the new (y, z, w)
  logic [31:0] o0, o1, o2;
  always_comb begin
    o0 = xs_next(sx, sw);
    o1 = xs_next(sy, o0);
    o2 = xs_next(sz, o1);
  end

  // sum of twelve uniform bytes
  logic [95:0]  bits;
  logic [11:0]  sum12;
  always_comb begin
    bits  = {o2, o1, o0};
    sum12 = '0;
    for (int k = 0; k < 12; k++) sum12 = sum12 + 12'(bits[8*k +: 8]);
  end

  logic signed [12:0] dev;       // sum - 1530, in [-1530, 1530]
  logic signed [26:0] prod;      // dev * sigma
  logic signed [26:0] rounded;   // round(prod / 65536)
  logic signed [U_W-1:0] u_next;

  always_comb begin
    dev     = $signed({1'b0, sum12}) - 13'sd1530;
    prod    = 27'(dev) * $signed({15'b0, sigma});
    // sum12 has a standard deviation of ~256 (8 fraction bits), sigma has
    // SIGMA_FRAC fraction bits
    rounded = (prod + (27'sd1 <<< (SIGMA_FRAC + 7))) >>> (SIGMA_FRAC + 8);
    if (rounded > $signed(27'(U_MAX)))       u_next = U_W'(U_MAX);
    else if (rounded < -$signed(27'(U_MAX))) u_next = -U_W'(U_MAX);
    else                                     u_next = U_W'(rounded);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {sx, sy, sz, sw} <= SEED_DEF;
      u       <= '0;
      u_valid <= 1'b0;
    end else begin
      u_valid <= en && !seed_load;
      if (seed_load) begin
        {sx, sy, sz, sw} <= (seed == '0) ? SEED_DEF : seed;
      end else if (en) begin
        sx <= sw;
        sy <= o0;
        sz <= o1;
        sw <= o2;
        u  <= u_next;
      end
    end
  end

endmodule
