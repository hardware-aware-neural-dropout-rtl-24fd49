// dropout_pkg: types, constants and arithmetic shared by the dropout layers.
//
// Activations are 16-bit signed fixed point with 1 sign bit, 7 integer bits
// and 8 fraction bits (Q7.8), the number format the accelerator uses. A drop
// probability p is carried as a 16-bit threshold round(p * 65536): an element
// is dropped when a 16-bit uniform random number is below it. Kept elements
// of the dynamic layers are multiplied by an unsigned Q8.8 scale, normally
// round(256 / (1 - p)), so the expected activation is unchanged (inverted
// dropout). The four layer kinds are enumerated in drop_type_e.
//
// The Q7.8 format is the paper's; the threshold/scale encoding, the default
// rate p = 0.25 and the saturation on overflow are this design's choices.
package dropout_pkg;

  localparam int unsigned DATA_W = 16;
  localparam int unsigned FRAC_W = 8;

  typedef logic signed [DATA_W-1:0] fix_t;

  typedef enum logic [1:0] {
    DROP_BERNOULLI   = 2'd0,
    DROP_RANDOM      = 2'd1,
    DROP_BLOCK       = 2'd2,
    DROP_MASKSEMBLES = 2'd3
  } drop_type_e;

  // Default drop probability 0.25 and the matching inverted-dropout scale 4/3.
  localparam logic [15:0] P_THRESH_DEFAULT = 16'd16384;
  localparam logic [15:0] SCALE_DEFAULT    = 16'd341;

  // Multiply a kept activation by an unsigned Q8.8 scale, round towards minus
  // infinity and saturate to the Q7.8 range.
  function automatic fix_t scale_keep(fix_t x, logic [15:0] scale);
    logic signed [33:0] prod;
    logic signed [33:0] shifted;
    prod    = 34'(x) * $signed({2'b00, scale});
    shifted = prod >>> FRAC_W;
    if (shifted > 34'sd32767)       return fix_t'(16'sh7fff);
    else if (shifted < -34'sd32768) return fix_t'(16'sh8000);
    else                            return fix_t'(shifted[15:0]);
  endfunction

  // One step of a 32-bit xorshift generator (shifts 13, 17, 5).
  function automatic logic [31:0] xorshift32(logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  // Non-zero start state of random lane `lane` of a generator seeded `seed`.
  function automatic logic [31:0] lane_seed(logic [31:0] seed, int unsigned lane);
    logic [31:0] s;
    s = seed ^ (32'h9e37_79b9 * (lane + 1));
    s = xorshift32(s | 32'h1);
    return (s == 32'h0) ? 32'h1 : s;
  endfunction

endpackage
