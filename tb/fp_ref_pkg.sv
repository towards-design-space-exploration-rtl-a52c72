// fp_ref_pkg: reference arithmetic for the testbenches.
//
// Converts between IEEE-754 single precision bit patterns and SystemVerilog 'real'
// (double precision) without relying on shortreal support: f32_to_real widens exactly,
// real_to_f32 rounds to nearest-even and flushes subnormals to zero like the RTL.
// Because the double of a single-precision sum or product is rounded only once more,
// real_to_f32(f32_to_real(a) op f32_to_real(b)) is the correctly rounded single result.
// Also holds the Winograd matrices used to build independent reference results.
package fp_ref_pkg;

  function automatic real f32_to_real(logic [31:0] x);
    logic [63:0] b;
    if (x[30:23] == 8'd0) return 0.0;
    // double exponent = single exponent - 127 + 1023
    b = {x[31], 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'd0};
    return $bitstoreal(b);
  endfunction

  function automatic logic [31:0] real_to_f32(real r);
    logic [63:0] b;
    int          e;
    logic [23:0] m;
    logic        g, st;
    b = $realtobits(r);
    if (b[62:52] == 11'd0) return {b[63], 31'd0};
    e = int'(b[62:52]) - 1023 + 127;
    m = {1'b0, b[51:29]};
    g = b[28];
    st = |b[27:0];
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) begin
      m = '0;
      e = e + 1;
    end
    if (e >= 255) return {b[63], 8'hFF, 23'd0};
    if (e <= 0)   return {b[63], 31'd0};
    return {b[63], 8'(e), m[22:0]};
  endfunction

  // B^T, G and A^T of F(3,3), points 0, 1, -1, 2 and infinity
  localparam real BT [5][5] = '{'{2, -1, -2, 1, 0}, '{0, -2, -1, 1, 0}, '{0, 2, -3, 1, 0},
                                '{0, -1, 0, 1, 0}, '{0, 2, -1, -2, 1}};
  localparam real GM [5][3] = '{'{0.5, 0, 0}, '{-0.5, -0.5, -0.5}, '{-1.0/6, 1.0/6, -1.0/6},
                                '{1.0/6, 1.0/3, 2.0/3}, '{0, 0, 1}};
  localparam real AT [3][5] = '{'{1, 1, 1, 1, 0}, '{0, 1, -1, 2, 0}, '{0, 1, 1, 4, 1}};

  // filter transform V = G g G^T of a 3x3 kernel (row-major), rounded to single
  function automatic void filter_transform(input real g [9], output logic [31:0] v [25]);
    real t [5][3];
    for (int i = 0; i < 5; i++)
      for (int j = 0; j < 3; j++) begin
        t[i][j] = 0.0;
        for (int k = 0; k < 3; k++) t[i][j] += GM[i][k] * g[3*k+j];
      end
    for (int i = 0; i < 5; i++)
      for (int j = 0; j < 5; j++) begin
        real s = 0.0;
        for (int k = 0; k < 3; k++) s += t[i][k] * GM[j][k];
        v[5*i+j] = real_to_f32(s);
      end
  endfunction

  // true if hw is within a relative tolerance of ref, scaled by a magnitude bound
  function automatic bit close(logic [31:0] hw, real ref_v, real mag);
    real diff = f32_to_real(hw) - ref_v;
    if (diff < 0) diff = -diff;
    return diff <= 1.0e-4 * mag + 1.0e-30;
  endfunction

  // a random single-precision value in (-scale, scale), returned as its bit pattern
  function automatic logic [31:0] rand_f32(real scale);
    real r = (real'($urandom_range(2000000, 0)) - 1000000.0) / 1000000.0 * scale;
    return real_to_f32(r);
  endfunction

endpackage
