// mx_pi -- one private element: FP32 V_i -> MX element P_i ("V_i -> P_i").
//
// Inputs are the shared scale x and the 10+R most significant bits of V_i:
//   v[9+R]     sign S
//   v[8+R:R+1] 8-bit FP32 exponent E
//   v[R:0]     the R+1 most significant mantissa bits (the rest of the FP32
//              mantissa is not used)
// Output p = {S, EK[K-1:0], MR[R-1:0]} for element type FMT (E5M2, E4M3,
// E3M2, E2M3 or E2M1; INT8 has no element rule and is rejected). The sign S
// is copied to p unchanged in every case.
//
// Rules, in priority order (B = 2^(K-1)-1, EMAX = 2^K-2):
//   x == 8'hFF (X is NaN)  -> p = {S, all ones, NaN mantissa}; the NaN
//                             mantissa is 1 for R=1 and {R-1 ones, 0} otherwise
//   x == 8'hFE (X is inf)  -> p = {S, all ones, all zeros}
//   otherwise the distance d of V_i below the block maximum is
//       d = X + B - E  for S = 0,   d = X + B + E  for S = 1
//   (the sign-dependent form reproduces the design's worked example, in which
//   a negative input of moderate size gives P = 1000...0; a consequence is
//   that negative inputs flush to zero unless E is very small)
//   d > EMAX   -> p = {S, 0, 0}                    (below the element range)
//   d < 0      -> p = {S, all ones, NaN mantissa or 0}: only an FP32 infinity
//                 or NaN input can be above the block maximum; it keeps its
//                 NaN/infinity meaning (this implementation's choice)
//   otherwise EK = EMAX - d and the R+1 mantissa bits are rounded to R bits,
//   half-way rounding up: {c, MR} = (v[R:0] + 1) >> 1. A carry c gives
//   EK + 1 with MR = 0, except at EK = EMAX, where the element saturates to
//   {EMAX, all ones} instead of reaching the all-ones exponent.
// The flush threshold EMAX is tighter than the design's "EK > 2^K", which
// would let d = 2^K-1 and 2^K wrap round to large exponents.
// Purely combinational.
module mx_pi
  import mx_pkg::*;
#(
  parameter mx_fmt_e FMT = MX_E5M2,
  localparam int unsigned K  = fmt_k(FMT),
  localparam int unsigned R  = fmt_r(FMT),
  localparam int unsigned PW = 1 + K + R
) (
  input  logic [7:0]    x,
  input  logic [9+R:0]  v,
  output logic [PW-1:0] p
);

  localparam int          B    = int'(fmt_bias(FMT));
  localparam int          EMAX = (1 << K) - 2;
  localparam logic [R-1:0] NAN_M = (R == 1) ? R'(1) : {{(R-1){1'b1}}, 1'b0};

  logic         s;
  logic [7:0]   e;
  logic [R:0]   mv;
  logic signed [11:0] d;
  logic [R+1:0] rsum;      // mv + 1
  logic [K-1:0] ek;

  assign s  = v[9+R];
  assign e  = v[8+R:R+1];
  assign mv = v[R:0];

  always_comb begin
    d    = s ? (12'(x) + 12'(B) + 12'(e)) : (12'(x) + 12'(B) - 12'(e));
    rsum = (R+2)'(mv) + 1'b1;
    ek   = K'(EMAX - d);

    if (x == X_NAN) begin
      p = {s, {K{1'b1}}, NAN_M};
    end else if (x == X_INF) begin
      p = {s, {K{1'b1}}, {R{1'b0}}};
    end else if (d > 12'(EMAX)) begin
      p = {s, {K{1'b0}}, {R{1'b0}}};
    end else if (d < 0) begin
      p = {s, {K{1'b1}}, (mv != '0) ? NAN_M : {R{1'b0}}};
    end else if (rsum[R+1]) begin
      if (ek == K'(EMAX)) p = {s, ek, {R{1'b1}}};
      else                p = {s, ek + 1'b1, {R{1'b0}}};
    end else begin
      p = {s, ek, rsum[R:1]};
    end
  end

  // A finite scale and an input inside the block range must never produce
  // the all-ones (infinity/NaN) exponent: rounding saturates instead.
  always_comb begin
    if (x != X_NAN && x != X_INF && d >= 0)
      assert (p[K+R-1 -: K] != {K{1'b1}})
        else $error("mx_pi: finite element reached the all-ones exponent");
  end

  if (FMT == MX_INT8) begin : g_bad_fmt
    $error("mx_pi: INT8 private elements are not supported");
  end

endmodule
