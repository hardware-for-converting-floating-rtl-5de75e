// mx_div -- shared-scale computation ("div" block).
//
// Input ev is the 31 magnitude bits of the largest FP32 input (8-bit
// exponent E = ev[30:23], 23-bit mantissa ev[22:0]); output x is the 8-bit
// shared scale X of the MX block for element type FMT.
//
//   X_temp = E - B  if E > B, else 0          (B = 2^(K-1)-1, see mx_pkg)
//   zm     = ~|ev[22:0]                       (mantissa all zero; the design
//                                              calls this signal "NaN")
//   E == 8'hFF, zm == 0  ->  X = 8'hFF         (X is NaN)
//   E == 8'hFF, zm == 1  ->  X = 8'hFE         ("infinity without sign")
//   otherwise            ->  X = X_temp
//
// So X is the largest exponent lowered by the largest exponent the element
// type can hold (15 for E5M2, 7 for E4M3, 3 for E3M2, 1 for E2M3 and E2M1, 0
// for INT8), which places the largest input at the top of the element range.
// The E - B subtraction and the clamp to 0 follow the worked examples and the
// FP32-to-X table of the design (E=171 -> X=156 for E5M2). Testing E == 8'hFF
// rather than X_temp == 255 - B is equivalent. For INT8 (B = 0) a finite
// E = 254 gives X = 8'hFE, the same code as infinity; the design does not
// separate the two. Purely combinational.
module mx_div
  import mx_pkg::*;
#(
  parameter mx_fmt_e FMT = MX_E5M2
) (
  input  logic [30:0] ev,
  output logic [7:0]  x
);

  localparam logic [7:0] B = 8'(fmt_bias(FMT));

  logic [7:0] e;
  logic [7:0] x_temp;
  logic       zm;

  assign e  = ev[30:23];
  assign zm = ~|ev[22:0];

  always_comb begin
    x_temp = (e > B) ? (e - B) : 8'd0;
    if (e == 8'hFF) x = zm ? X_INF : X_NAN;
    else            x = x_temp;
  end

endmodule
