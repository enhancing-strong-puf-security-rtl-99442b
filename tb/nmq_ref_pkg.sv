// nmq_ref_pkg: reference arithmetic for the NMQ-RO testbenches, written
// independently of the RTL from the documented formulas.
//   mismatch hash h(x): x ^= x>>16; x *= 0x7feb352d; x ^= x>>15;
//                       x *= 0x846ca68b; x ^= x>>16         (32-bit)
//   gauss(seed, idx)  = (sum_{j<4} h(seed*0x9E3779B9 + 4*idx + j)/2^32 - 2)*sqrt(3)
//   device delay (fs) = round(nominal_ps*1000*(1 + sigma*gauss))
//   traversal D_r(c)  = t_nand_r + sum_i t_inv_r[i][c_i]
//   toggles(Dp,Dq,g)  = #{k >= 1 : (2k-1)*Dp < 2*g*Dq}
package nmq_ref_pkg;
  timeunit 1ps;
  timeprecision 1fs;

  function automatic bit [31:0] ref_hash(input bit [31:0] x);
    bit [63:0] m;
    x = x ^ {16'h0, x[31:16]};
    m = 64'(x) * 64'h7feb352d;  x = m[31:0];
    x = x ^ {15'h0, x[31:15]};
    m = 64'(x) * 64'h846ca68b;  x = m[31:0];
    x = x ^ {16'h0, x[31:16]};
    return x;
  endfunction

  function automatic real ref_gauss(input int unsigned seed, input int unsigned idx);
    real s;
    bit [63:0] base;
    base = 64'(seed) * 64'h9E3779B9;
    s = 0.0;
    for (int j = 0; j < 4; j++)
      s += real'(ref_hash(base[31:0] + 32'(idx) * 4 + 32'(j))) / 4294967296.0;
    return (s - 2.0) * $sqrt(3.0);
  endfunction

  function automatic longint ref_dev_fs(input real nominal_ps, input real sigma,
                                        input int unsigned seed, input int unsigned idx);
    return longint'(nominal_ps * 1000.0 * (1.0 + sigma * ref_gauss(seed, idx)));
  endfunction

  // Traversal delay of ring r (0 = p, 1 = q) for challenge c, femtoseconds.
  function automatic longint ref_traversal_fs(input int unsigned seed, input int r,
                                              input logic [63:0] c, input int n,
                                              input real t_inv, input real t_nand,
                                              input real sigma);
    longint d;
    int unsigned base;
    base = r * (2 * n + 1);
    d = ref_dev_fs(t_nand, sigma, seed, base + 2 * n);
    for (int i = 0; i < n; i++)
      d += ref_dev_fs(t_inv, sigma, seed, base + 2 * i + (c[i] ? 1 : 0));
    return d;
  endfunction

  // Number of p rising edges while q makes g rising edges. tie=1 when an
  // edge of p coincides with the stop, where the outcome is a race.
  function automatic longint ref_toggles(input longint dp, input longint dq,
                                         input longint g, output bit tie);
    longint x, k;
    x = 2 * g * dq;
    k = (x + dp - 1) / dp;     // ceil(x/dp): (2k-1) < x/dp  <=>  2k-1 <= k - 1
    tie = (x % dp == 0);
    return k / 2;
  endfunction
endpackage
