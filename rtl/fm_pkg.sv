// fm_pkg: types and constants shared by the FastMamba fixed-point datapath.
//
// Holds the mode encoding of the Nonlinear Approximation Unit, and the eight segment
// coefficients of the linear approximation of 2^v used for exp and SoftPlus.
// The coefficients are this design's own: chords of 2^-f over f in
// [s/8,(s+1)/8), K_s = 8*(2^(-s/8) - 2^(-(s+1)/8)), B_s = 2^(-s/8) + K_s*s/8,
// both rounded to Q1.15, so 2^v = B_s + K_s*v for v = -f.
package fm_pkg;

  localparam int unsigned LUT_FRAC  = 15;  // fraction bits of the segment LUTs

  // Nonlinear Approximation Unit function select.
  typedef enum logic {
    NAU_EXP      = 1'b0,   // y = exp(x), x <= 0
    NAU_SOFTPLUS = 1'b1    // y = SoftPlus(x) ~ exp(x) (x<=0), exp(-x)+x (x>0)
  } nau_func_e;

  // 8-segment linear approximation of 2^v, v in (-1,0]: LUT-k and LUT-b.
  typedef logic [16:0] lut_word_t;
  localparam lut_word_t LUT_K [8] = '{17'd21757, 17'd19951, 17'd18295, 17'd16777,
                                      17'd15384, 17'd14108, 17'd12937, 17'd11863};
  localparam lut_word_t LUT_B [8] = '{17'd32768, 17'd32542, 17'd32128, 17'd31559,
                                      17'd30863, 17'd30065, 17'd29187, 17'd28247};

  // Power-of-two rescaling shifts of the SSM module (one per narrowing step).
  typedef struct packed {
    logic [5:0] sh_da;   // delta~ x A        -> 16b   (Step 2, PMU n=24)
    logic [5:0] sh_q;    // delta~ x X        -> Q 16b (Step 2, PMU n=64)
    logic [5:0] sh_qb;   // Q x B             -> B^bar 32b (Step 3, PMU)
    logic [5:0] sh_ch;   // C . H             -> h^bar 30b (Step 3, MAT)
    logic [5:0] sh_dx;   // d x x             -> aligned with h^bar (Step 3, PMA)
  } ssm_shift_t;

endpackage
