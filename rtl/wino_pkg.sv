// wino_pkg: shared types and constants of the F(3x3,3x3) Winograd convolution engine.
//
// The engine computes 3x3 output tiles (m = 3) of a 3x3 convolution (r = 3) from
// 5x5 input tiles (alpha = m + r - 1 = 5), all in IEEE-754 single precision, as the
// design this RTL follows does. Tiles travel as packed arrays of 32-bit words in
// row-major order (word 5*row + col). A small tag (ctl_t) travels beside each tile
// through the pipeline and marks the first and last input channel of a tile position,
// which the accumulation buffers use. The tag and its encoding are this design's own.
package wino_pkg;

  localparam int unsigned M_OUT = 3;                 // output tile edge m
  localparam int unsigned R_K   = 3;                 // kernel edge r
  localparam int unsigned ALPHA = M_OUT + R_K - 1;   // input tile edge, 5
  localparam int unsigned POS_W = 16;                // width of the tile-position tag

  typedef logic [31:0] fp32_t;
  typedef fp32_t [ALPHA*ALPHA-1:0] dtile_t;   // 25 words: d or U or V tile
  typedef fp32_t [M_OUT*M_OUT-1:0] otile_t;   // 9 words: Y tile
  typedef fp32_t [ALPHA-1:0]       vec5_t;
  typedef fp32_t [M_OUT-1:0]       vec3_t;

  typedef struct packed {
    logic             valid;   // a tile is present in this stage
    logic             first;   // first input channel of this tile position
    logic             last;    // last input channel of this tile position
    logic [POS_W-1:0] pos;     // tile position index within the pass
  } ctl_t;

  localparam ctl_t CTL_IDLE = '{valid: 1'b0, first: 1'b0, last: 1'b0, pos: '0};

  // Change the sign of a float (used for the '-' inputs of subtractors).
  function automatic fp32_t fp_neg(fp32_t x);
    return {~x[31], x[30:0]};
  endfunction

  // Multiply a float by 2**k (k = 1 or 2 here) by adding to the exponent: the
  // shift-style constant multiplication of the transforms. Zero stays zero,
  // infinity/NaN stay as they are, exponent overflow gives infinity.
  function automatic fp32_t fp_pow2(fp32_t x, logic [1:0] k);
    logic [8:0] e;
    if (x[30:23] == 8'd0 || x[30:23] == 8'hFF) return (x[30:23] == 8'd0) ? {x[31], 31'd0} : x;
    e = {1'b0, x[30:23]} + {7'd0, k};
    if (e >= 9'd255) return {x[31], 8'hFF, 23'd0};
    return {x[31], e[7:0], x[22:0]};
  endfunction

endpackage
