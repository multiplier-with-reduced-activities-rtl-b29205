// olm_pkg -- shared types, constants and width schedule of the pipelined
// radix-2 online multiplier.
//
// The multiplier unrolls the n+DELTA iterations of the radix-2 online
// multiplication recurrence into pipeline stages, stage j = -DELTA .. n-1.
// Every stage carries only the bit slices that still matter, so the widths
// of the residual, of the operand prefixes and of the registers differ from
// stage to stage. The constant functions below compute those widths; the
// stage and top modules take all their sizes from them.
//
// Fixed by the algorithm: radix 2, online delay DELTA = 3, t = 2 fractional
// bits in the selection estimate, ib = 2 integer bits in the residual, and the
// reduced working precision p = ceil((2n + DELTA + t)/3).
//
// Width schedule (own reconstruction of the activation/deactivation pattern):
//   F(j)  fractional bits of v[j] kept in stage j
//         = min( exact width j+2*DELTA+1 while input digits arrive,
//                then one bit less per stage (plain shift),
//                cap p + t (working precision p after the t selection bits),
//                tail limit t + (n-1-j) + g )
//   g (g_calc) is a guard of extra bits in the tail of the schedule, so
//   that the product stays within one unit in the last place for
//   n = 8..32 (checked with a bit-accurate model over random and extreme
//   operands, and by the testbenches).
package olm_pkg;

  localparam int DELTA = 3;  // online delay
  localparam int T     = 2;  // fractional bits of the selection estimate
  localparam int IB    = 2;  // integer bits of the residual
  localparam int EST_W = IB + T;  // width of the estimate CPA (V module)

  // Signed digit in {-1,0,1}, value = pos - neg. {1,1} is read as 0.
  typedef struct packed {
    logic pos;
    logic neg;
  } sd_digit_t;

  localparam sd_digit_t SD_ZERO = '{pos: 1'b0, neg: 1'b0};

  function automatic int imin(int a, int b);
    return (a < b) ? a : b;
  endfunction

  // reduced working precision p = ceil((2n + DELTA + t)/3)
  function automatic int p_calc(int n);
    return (2 * n + DELTA + T + 2) / 3;
  endfunction

  // guard bits of the tail schedule: 3 + ceil(log2(n/8)) (3, 4, 5, 5 for
  // n = 8, 16, 24, 32); the truncation error accumulates over more stages
  // as n grows, and with this guard the product stays below one unit in the
  // last place
  function automatic int g_calc(int n);
    return 3 + $clog2((n + 7) / 8);
  endfunction

  // fractional bits of v[j] computed in stage j
  function automatic int f_v(int n, int p, int g, int j);
    int f;
    int full;
    f = 0;
    for (int i = -DELTA; i <= j; i++) begin
      full = (i <= n - DELTA - 1) ? i + 2 * DELTA + 1 : f - 1;
      f = imin(imin(full, p + T), T + (n - 1 - i) + g);
    end
    return f;
  endfunction

  // fractional bits of the residual register 2w[j+1] written by stage j
  function automatic int rf(int n, int p, int g, int j);
    if (j < -DELTA || j >= n - 1) return 2;  // no register: minimal port width
    return imin(f_v(n, p, g, j) - 1, f_v(n, p, g, j + 1));
  endfunction

  // residual carry vector of stage j's output register is full width
  // (initialization stage) or holds only the bits below the estimate
  function automatic bit wc_full(int j);
    return j < 0;
  endfunction

  function automatic int ws_width(int n, int p, int g, int j);
    return IB + rf(n, p, g, j);
  endfunction

  function automatic int wc_width(int n, int p, int g, int j);
    return wc_full(j) ? IB + rf(n, p, g, j) : rf(n, p, g, j) - 1;
  endfunction

  // Operand prefixes x[j], y[j] are kept in two's complement with one sign
  // bit and lx fractional bits. lx_in(j): bits of x[j] entering stage j;
  // appends(j): stage j appends digit j+DELTA+1 (otherwise that digit lies
  // below the kept precision and only acts as a multiplier digit).
  function automatic int lx_in(int n, int p, int g, int j);
    int l;
    int lnew;
    l = 0;
    for (int i = -DELTA; i < j; i++) begin
      lnew = (i + DELTA + 1 <= n && f_v(n, p, g, i) - DELTA > l) ? l + 1 : l;
      l = imin(lnew, f_v(n, p, g, i + 1) - DELTA);
    end
    return l;
  endfunction

  function automatic bit appends(int n, int p, int g, int j);
    return (j + DELTA + 1 <= n) && (f_v(n, p, g, j) - DELTA > lx_in(n, p, g, j));
  endfunction

  // stage j receives input digits x_{j+4}, y_{j+4}
  function automatic bit has_input(int n, int j);
    return j + DELTA + 1 <= n;
  endfunction

  // stage j writes operand registers for stage j+1
  function automatic bit has_x_out(int n, int j);
    return has_input(n, j + 1);
  endfunction

  // stage j writes the x[j]-ulp companion registers (a later append needs them)
  function automatic bit has_xm_out(int n, int p, int g, int j);
    return has_x_out(n, j) && appends(n, p, g, j + 1);
  endfunction

endpackage
