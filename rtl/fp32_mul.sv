// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// One of these is each 'X' of the element-wise multiplication stage (25 per PE).
// The 24-bit significands are multiplied into a 48-bit product, normalised by at
// most one place and rounded to nearest, ties to even. Subnormal inputs are read as
// zero and results below the normal range are flushed to zero; infinity and NaN are
// handled simply (0 * inf = NaN). Single precision follows the design; the rest is
// this design's own choice.
//
// Interface: a, b in, y = round(a * b) out, no clock.
module fp32_mul
  import wino_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        s;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic [47:0] prod;
  logic [9:0]  e_res;
  logic [23:0] mant;
  logic        g, st, round_up;
  logic [24:0] rnd;
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    s  = a[31] ^ b[31];
    ea = a[30:23]; eb = b[30:23];
    ma = {1'b1, a[22:0]}; mb = {1'b1, b[22:0]};
    a_zero = (ea == 8'd0); b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == 0); b_inf = (eb == 8'hFF) && (b[22:0] == 0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != 0); b_nan = (eb == 8'hFF) && (b[22:0] != 0);
    prod   = ma * mb;
    e_res  = {2'b00, ea} + {2'b00, eb} - 10'd127;
    if (prod[47]) begin
      mant  = prod[47:24];
      g     = prod[23];
      st    = |prod[22:0];
      e_res = e_res + 10'd1;
    end else begin
      mant  = prod[46:23];
      g     = prod[22];
      st    = |prod[21:0];
    end
    round_up = g & (st | mant[0]);
    rnd      = {1'b0, mant} + {24'd0, round_up};
    if (rnd[24]) begin
      rnd   = rnd >> 1;
      e_res = e_res + 10'd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = 32'h7FC0_0000;
    else if (a_inf || b_inf)
      y = {s, 8'hFF, 23'd0};
    else if (a_zero || b_zero)
      y = {s, 31'd0};
    else if (e_res[9] || e_res == 10'd0)
      y = {s, 31'd0};                      // underflow: flush to zero
    else if (e_res >= 10'd255)
      y = {s, 8'hFF, 23'd0};               // overflow
    else
      y = {s, e_res[7:0], rnd[22:0]};
  end

endmodule
