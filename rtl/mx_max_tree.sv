// mx_max_tree -- largest-value computation over N FP32 inputs.
//
// A balanced binary tree of mx_comp cells: level 1 compares v[0] with v[1],
// v[2] with v[3], ...; each further level compares the winners of adjacent
// pairs, until one word remains. For the default N = 32 this is 16 + 8 + 4 +
// 2 + 1 = 31 cells in five levels, the level outputs being the a, b, c, d
// signals of the block diagram. The output ev is the whole winning FP32 word
// (EV_i[32:1]); its exponent is the largest exponent among the inputs whose
// exponent is not 8'hFF (see mx_comp). N must be a power of two.
// Purely combinational: the delay is LEVELS cell delays.
module mx_max_tree #(
  parameter int unsigned N = 32
) (
  input  logic [31:0] v [N],
  output logic [31:0] ev
);

  localparam int unsigned LEVELS = $clog2(N);

  // g_lvl[l].w[j]: j-th winner of tree level l; level 1 reads the inputs.
  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    logic [31:0] w [N >> l];
    for (genvar j = 0; j < (N >> l); j++) begin : g_cell
      if (l == 1) begin : g_first
        mx_comp u_comp (.a(v[2*j]), .b(v[2*j+1]), .y(w[j]));
      end else begin : g_next
        mx_comp u_comp (.a(g_lvl[l-1].w[2*j]), .b(g_lvl[l-1].w[2*j+1]), .y(w[j]));
      end
    end
  end

  assign ev = g_lvl[LEVELS].w[0];

  if (N < 2 || (N & (N - 1)) != 0) begin : g_bad_n
    $error("mx_max_tree: N must be a power of two");
  end

endmodule
