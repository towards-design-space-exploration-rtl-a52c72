// fp32_add: combinational IEEE-754 single-precision adder.
//
// Every '+' and '-' of the data transform, the inverse transforms and the channel
// accumulation is one of these (a subtractor is this adder with the sign of b
// flipped by the caller). The operands are aligned with three extra bits (guard,
// round, sticky), added or subtracted, renormalised with a leading-zero count and
// rounded to nearest, ties to even. Subnormal inputs are read as zero and subnormal
// results are flushed to zero; an infinity or NaN operand gives infinity or the
// canonical NaN. The precision follows the design (single-precision floats); the
// internal organisation, the flush-to-zero and the single-cycle timing are this
// design's own choices.
//
// Interface: a, b in, y = round(a + b) out, no clock.
module fp32_add
  import wino_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [23:0] ma, mb, ml, ms;
  logic [7:0]  d;
  logic [26:0] xl, xs, xs_al;
  logic [27:0] sum;
  logic [26:0] norm;
  logic [4:0]  lz;
  logic [9:0]  e_res;
  logic [24:0] rnd;
  logic        round_up, sticky;

  // leading-zero count of a 27-bit value, as a binary search over halves
  function automatic logic [4:0] lzc27(logic [26:0] v);
    logic [31:0] x;
    logic [4:0]  n;
    x = {v, 5'b11111};
    n = '0;
    if (x[31:16] == '0) begin n[4] = 1'b1; x = x << 16; end
    if (x[31:24] == '0) begin n[3] = 1'b1; x = x << 8;  end
    if (x[31:28] == '0) begin n[2] = 1'b1; x = x << 4;  end
    if (x[31:30] == '0) begin n[1] = 1'b1; x = x << 2;  end
    if (x[31]    == 1'b0) n[0] = 1'b1;
    return n;
  endfunction

  always_comb begin
    sticky = 1'b0;
    sa = a[31]; ea = a[30:23]; ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    // order the operands by magnitude
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; ms = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; ms = ma;
    end
    d  = el - es;
    xl = {ml, 3'b000};
    xs = {ms, 3'b000};
    if (d >= 8'd27) begin
      xs_al = {26'd0, (ms != 24'd0)};
    end else begin
      // bits shifted out below the sticky position
      sticky = |(xs & ~(27'h7FF_FFFF << d[4:0]));
      xs_al  = (xs >> d[4:0]) | {26'd0, sticky};
    end
    if (sl == ss) sum = {1'b0, xl} + {1'b0, xs_al};
    else          sum = {1'b0, xl} - {1'b0, xs_al};

    e_res = {2'b00, el};
    lz    = '0;
    norm  = '0;
    if (sum[27]) begin
      norm  = sum[27:1] | {26'd0, sum[0]};
      e_res = e_res + 10'd1;
    end else begin
      lz    = lzc27(sum[26:0]);
      norm  = sum[26:0] << lz;
      e_res = e_res - {5'd0, lz};
    end
    round_up = norm[2] & (norm[1] | norm[0] | norm[3]);
    rnd      = {1'b0, norm[26:3]} + {24'd0, round_up};
    if (rnd[24]) begin
      rnd   = rnd >> 1;
      e_res = e_res + 10'd1;
    end

    if (ea == 8'hFF || eb == 8'hFF) begin
      if ((ea == 8'hFF && a[22:0] != 0) || (eb == 8'hFF && b[22:0] != 0) ||
          (ea == 8'hFF && eb == 8'hFF && sa != sb))
        y = 32'h7FC0_0000;
      else
        y = (ea == 8'hFF) ? {sa, 8'hFF, 23'd0} : {sb, 8'hFF, 23'd0};
    end else if (sum == 28'd0) begin
      y = (sa & sb) ? 32'h8000_0000 : 32'h0000_0000;   // x - x = +0
    end else if (e_res[9] || e_res == 10'd0) begin
      y = {sl, 31'd0};                                  // underflow: flush to zero
    end else if (e_res >= 10'd255) begin
      y = {sl, 8'hFF, 23'd0};                           // overflow
    end else begin
      y = {sl, e_res[7:0], rnd[22:0]};
    end
  end

endmodule
