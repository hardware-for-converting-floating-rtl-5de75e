// mx_pkg -- shared types and constants of the FP32 -> MX converter.
//
// An MX block is one 8-bit shared scale X (an exponent, bias 127) plus N
// private elements P_i, each a small sign/exponent/mantissa number EKMR
// (1 sign bit, K exponent bits, R mantissa bits). The element types and
// their K and R follow the bit-width table of the design:
//
//   type   K  R   element width 1+K+R   exponent bias B = 2^(K-1)-1
//   E5M2   5  2   8                     15
//   E4M3   4  3   8                     7
//   E3M2   3  2   6                     3
//   E2M3   2  3   6                     1
//   E2M1   2  1   4                     1
//   INT8   1  6   8                     0
//
// INT8 is listed as "E1M6" here because that is how the widths are given;
// only its shared scale is computed by this RTL (its element rounding rule
// is not defined), see mx_div. The bias B is the amount the shared-scale
// step subtracts from the largest FP32 exponent.
package mx_pkg;

  typedef enum logic [2:0] {
    MX_E5M2 = 3'd0,
    MX_E4M3 = 3'd1,
    MX_E3M2 = 3'd2,
    MX_E2M3 = 3'd3,
    MX_E2M1 = 3'd4,
    MX_INT8 = 3'd5
  } mx_fmt_e;

  // Special shared-scale codes.
  localparam logic [7:0] X_NAN = 8'hFF;  // shared scale is NaN
  localparam logic [7:0] X_INF = 8'hFE;  // "infinity without sign"

  // Number of exponent bits K of an element type.
  function automatic int unsigned fmt_k(mx_fmt_e f);
    case (f)
      MX_E5M2: return 5;
      MX_E4M3: return 4;
      MX_E3M2: return 3;
      MX_E2M3: return 2;
      MX_E2M1: return 2;
      default: return 1;  // INT8
    endcase
  endfunction

  // Number of mantissa bits R of an element type.
  function automatic int unsigned fmt_r(mx_fmt_e f);
    case (f)
      MX_E5M2: return 2;
      MX_E4M3: return 3;
      MX_E3M2: return 2;
      MX_E2M3: return 3;
      MX_E2M1: return 1;
      default: return 6;  // INT8
    endcase
  endfunction

  // Exponent bias B = 2^(K-1) - 1, the largest element exponent value.
  function automatic int unsigned fmt_bias(mx_fmt_e f);
    return (1 << (fmt_k(f) - 1)) - 1;
  endfunction

  // Width of one private element, 1 + K + R.
  function automatic int unsigned fmt_pw(mx_fmt_e f);
    return 1 + fmt_k(f) + fmt_r(f);
  endfunction

endpackage
