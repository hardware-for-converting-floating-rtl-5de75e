// fp32_to_mx -- FP32 to MX block converter, N = 32 inputs, one element type.
//
// Converts N single-precision numbers v[0..N-1] into one MX block: an 8-bit
// shared scale x and N private elements p[i] of type FMT, in three
// combinational steps:
//   1. mx_max_tree  finds the input of largest magnitude (inputs whose
//                   exponent is 8'hFF are skipped);
//   2. mx_div       turns its exponent into the shared scale x;
//   3. mx_private_elems rescales and rounds every input against x.
// There is no clock and no storage: outputs follow inputs after the
// combinational delay (five comparator levels, one subtractor, one element
// stage). FMT may be E5M2, E4M3, E3M2, E2M3 or E2M1; the default is E5M2.
// Each element type is a separate instance, as in the design, rather than a
// run-time mode.
module fp32_to_mx
  import mx_pkg::*;
#(
  parameter mx_fmt_e     FMT = MX_E5M2,
  parameter int unsigned N   = 32,
  localparam int unsigned PW = fmt_pw(FMT)
) (
  input  logic [31:0]   v [N],
  output logic [7:0]    x,
  output logic [PW-1:0] p [N]
);

  // Largest input word. Its sign bit ev[31] is not needed: the shared scale
  // depends on the magnitude only, so it is left unconnected.
  logic [31:0] ev;

  mx_max_tree #(.N(N)) u_max (
    .v  (v),
    .ev (ev)
  );

  mx_div #(.FMT(FMT)) u_div (
    .ev (ev[30:0]),
    .x  (x)
  );

  mx_private_elems #(.FMT(FMT), .N(N)) u_pe (
    .x (x),
    .v (v),
    .p (p)
  );

endmodule
