// mx_comp -- the "comp" cell of the largest-value tree.
//
// Takes two FP32 words a and b and passes one of them on whole (sign
// included), so that the tree that chains these cells ends with the input of
// largest magnitude:
//   * both exponents are 8'hFF              -> y = 32'h0
//   * only one exponent is 8'hFF            -> y = the other word
//   * neither exponent is 8'hFF             -> y = the word whose magnitude
//                                              bits [30:0] are larger
// An exponent of 8'hFF (infinity or NaN) therefore never wins; these three
// rules are the design's. Magnitudes are compared on all 31 bits, exponent
// first, so the winner also has the largest exponent; on equal magnitudes a
// is passed (the tie rule is this implementation's choice, it does not change
// the exponent that wins). Purely combinational, no clock.
module mx_comp (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  logic a_spec, b_spec;

  assign a_spec = (a[30:23] == 8'hFF);
  assign b_spec = (b[30:23] == 8'hFF);

  always_comb begin
    if (a_spec && b_spec)      y = 32'h0;
    else if (a_spec)           y = b;
    else if (b_spec)           y = a;
    else if (b[30:0] > a[30:0]) y = b;
    else                       y = a;
  end

endmodule
