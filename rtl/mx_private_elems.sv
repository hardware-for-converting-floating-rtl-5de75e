// mx_private_elems -- private-element computation for a whole block.
//
// N copies of mx_pi sharing the scale x. Element i receives the 10+R most
// significant bits of v[i] (sign, exponent, R+1 mantissa bits) and produces
// p[i], 1+K+R bits wide. Purely combinational.
module mx_private_elems
  import mx_pkg::*;
#(
  parameter mx_fmt_e     FMT = MX_E5M2,
  parameter int unsigned N   = 32,
  localparam int unsigned R  = fmt_r(FMT),
  localparam int unsigned PW = fmt_pw(FMT)
) (
  input  logic [7:0]    x,
  input  logic [31:0]   v [N],
  output logic [PW-1:0] p [N]
);

  for (genvar i = 0; i < N; i++) begin : g_pi
    mx_pi #(.FMT(FMT)) u_pi (
      .x (x),
      .v (v[i][31 -: 10+R]),
      .p (p[i])
    );
  end

endmodule
