// pcomp_pkg -- types and constants shared by the RRAM p-computer blocks.
//
// The array geometry (1152 wordlines x 512 bitline pairs) and the size of the
// in-array random bias region (18 positive + 18 negative rows) are the
// published chip's numbers. The fixed-point format of sigma (unsigned Q4.8),
// the encoding of a wordline's source and the cell-pair encoding are this
// design's own choices.
//
// Lint note: a module compiled on its own uses only some of these constants,
// so a linter may list the others as unused parameters of that module.
package pcomp_pkg;

  // ---- array geometry -----------------------------------------------------
  localparam int unsigned N_WL_DEF  = 1152;  // wordlines (rows)
  localparam int unsigned N_BLP_DEF = 512;   // bitline pairs = CSAs = p-bits
  localparam int unsigned N_BIAS_DEF = 18;   // rows per bias polarity

  // ---- Gaussian RNG / DSA ------------------------------------------------
  localparam int unsigned SIGMA_W    = 12;   // unsigned Q4.8, 256 = 1.0
  localparam int unsigned SIGMA_FRAC = 8;
  localparam int unsigned U_W        = 8;    // signed threshold u

  // ---- a wordline's source in the WL switching matrix --------------------
  typedef enum logic [2:0] {
    SRC_OFF      = 3'd0,  // row never driven
    SRC_ON       = 3'd1,  // row always driven during a read (static bias h_i)
    SRC_PBIT     = 3'd2,  // row follows the state of p-bit idx
    SRC_BIAS_POS = 3'd3,  // row idx of the positive random-bias region
    SRC_BIAS_NEG = 3'd4   // row idx of the negative random-bias region
  } wl_src_e;

  localparam int unsigned MAP_IDX_W = 10;

  typedef struct packed {
    wl_src_e                src;
    logic [MAP_IDX_W-1:0]   idx;
  } wl_map_t;

  // ---- a cell pair: bit 0 = left cell (BL(i,1)) formed, bit 1 = right ----
  typedef logic [1:0] cell_pair_t;
  localparam cell_pair_t CELL_ZERO = 2'b00;
  localparam cell_pair_t CELL_POS  = 2'b01;
  localparam cell_pair_t CELL_NEG  = 2'b10;

endpackage
