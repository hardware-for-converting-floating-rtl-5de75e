// tb_fp32_to_mx -- end-to-end test of the converter at its default size:
// 32 FP32 inputs to one E5M2 MX block.
//
// Starts with the worked example of the design (V1..V4 with exponents 171,
// 168, 43 and 143, the rest zero: X = 10011100, P1..P4 = 01111010,
// 01101111, 00000000, 10000000), then converts random blocks of several
// kinds and checks X and all 32 elements against the reference model.
// It counts how often each mechanism of the converter was exercised and
// fails any that never happened:
//   flush    an element below the element range becomes 0
//   carry    rounding carries into the element exponent
//   sat      rounding at the largest element saturates instead
//   skip     an input with exponent 8'hFF is passed over by the tree
//   pairz    a pair of such inputs meets in the tree (gives a 0 word)
//   above    an infinity/NaN input lies above the block maximum
//   xclamp   the largest exponent is <= 15, so X is clamped to 0
//   negkeep  a negative input survives the sign-dependent offset
// The NaN/infinity scale codes cannot arise here: the tree never selects an
// exponent-8'hFF input (they are covered by the shared-scale unit's test).
module tb_fp32_to_mx;
  import mx_pkg::*;
  import mx_ref_pkg::*;

  localparam int N = 32;
  logic [31:0] v [N];
  logic [7:0]  x;
  logic [7:0]  p [N];
  int checks = 0, failures = 0;
  int n_flush = 0, n_carry = 0, n_sat = 0, n_skip = 0, n_pairz = 0;
  int n_above = 0, n_xclamp = 0, n_negkeep = 0;

  fp32_to_mx dut (.v(v), .x(x), .p(p));

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Check one converted block and count the mechanisms it used.
  task automatic convert(string tag);
    logic [7:0] ex, ep;
    logic [30:0] mx;
    int d, mvi;
    #1;
    mx = ref_max(v, N);
    ex = ref_x(MX_E5M2, mx);
    checks++;
    if (x !== ex) begin
      failures++;
      $display("FAIL %s X=%b expected %b", tag, x, ex);
    end
    if (mx[30:23] <= 8'd15) n_xclamp++;
    for (int i = 0; i < N; i += 2)
      if (v[i][30:23] == 8'hFF && v[i+1][30:23] == 8'hFF) n_pairz++;
    foreach (v[i]) begin
      ep = ref_p(MX_E5M2, ex, v[i]);
      checks++;
      if (p[i] !== ep) begin
        failures++;
        $display("FAIL %s element %0d v=%h P=%b expected %b", tag, i, v[i], p[i], ep);
      end
      d   = v[i][31] ? int'(ex) + 15 + int'(v[i][30:23]) : int'(ex) + 15 - int'(v[i][30:23]);
      mvi = int'(v[i][22:20]);
      if (v[i][30:23] == 8'hFF) n_skip++;
      if (d > 30) n_flush++;
      else if (d < 0) n_above++;
      else begin
        if (v[i][31]) n_negkeep++;
        if (mvi == 7 && d == 0) n_sat++;
        else if (mvi == 7) n_carry++;
      end
    end
  endtask

  function automatic logic [31:0] fp(bit s, int e, logic [22:0] m);
    return {s, 8'(e), m};
  endfunction

  initial begin
    // Worked example.
    foreach (v[i]) v[i] = 32'h0;
    v[0] = fp(0, 171, 23'b011 << 20);
    v[1] = fp(0, 168, 23'b110 << 20);
    v[2] = fp(0, 43,  23'b001 << 20);
    v[3] = fp(1, 143, 23'b001 << 20);
    convert("example");
    checks += 5;
    if (x    !== 8'b1001_1100) begin failures++; $display("FAIL example X=%b", x); end
    if (p[0] !== 8'b0111_1010) begin failures++; $display("FAIL example P1=%b", p[0]); end
    if (p[1] !== 8'b0110_1111) begin failures++; $display("FAIL example P2=%b", p[1]); end
    if (p[2] !== 8'b0000_0000) begin failures++; $display("FAIL example P3=%b", p[2]); end
    if (p[3] !== 8'b1000_0000) begin failures++; $display("FAIL example P4=%b", p[3]); end

    for (int t = 0; t < 4000; t++) begin
      int base;
      base = (t % 4 == 3) ? int'($urandom % 16) : 40 + int'($urandom % 170);
      foreach (v[i]) begin
        v[i] = $urandom;
        v[i][30:23] = 8'(base - int'($urandom % (base < 34 ? base + 1 : 34)));
        if ($urandom % 3 == 0) v[i][22:20] = 3'b111;
      end
      if (t % 5 == 0) v[$urandom % N][30:23] = 8'hFF;
      if (t % 7 == 0) begin v[4][30:23] = 8'hFF; v[5][30:23] = 8'hFF; end
      convert("random");
    end

    $display("mechanisms: flush=%0d carry=%0d sat=%0d skip=%0d pairz=%0d above=%0d xclamp=%0d negkeep=%0d",
             n_flush, n_carry, n_sat, n_skip, n_pairz, n_above, n_xclamp, n_negkeep);
    if (n_flush == 0)   begin failures++; $display("FAIL flush never happened");   end
    if (n_carry == 0)   begin failures++; $display("FAIL carry never happened");   end
    if (n_sat == 0)     begin failures++; $display("FAIL sat never happened");     end
    if (n_skip == 0)    begin failures++; $display("FAIL skip never happened");    end
    if (n_pairz == 0)   begin failures++; $display("FAIL pairz never happened");   end
    if (n_above == 0)   begin failures++; $display("FAIL above never happened");   end
    if (n_xclamp == 0)  begin failures++; $display("FAIL xclamp never happened");  end
    if (n_negkeep == 0) begin failures++; $display("FAIL negkeep never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
