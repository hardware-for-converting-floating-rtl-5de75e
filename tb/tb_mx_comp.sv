// tb_mx_comp -- self-checking test of the two-input comparator cell.
// Directed cases for the three exponent-8'hFF rules and equal magnitudes,
// then random pairs (with infinities and NaNs mixed in) checked against a
// real-number comparison of the magnitudes.
module tb_mx_comp;
  import mx_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  mx_comp dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] ta, logic [31:0] tb_, logic [31:0] exp);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      $display("FAIL a=%h b=%h y=%h expected %h", ta, tb_, y, exp);
    end
  endtask

  function automatic logic [31:0] rnd_word();
    logic [31:0] w;
    w = $urandom;
    case ($urandom % 8)
      0: w[30:23] = 8'hFF;                 // infinity / NaN
      1: w[30:23] = 8'h00;                 // zero / subnormal
      2: w[30:23] = 8'(100 + $urandom % 8); // close exponents
      default: ;
    endcase
    return w;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ra, rb, e;
    // both special -> 0
    check(32'h7F80_0000, 32'hFFC0_0001, 32'h0);
    // one special -> the other
    check(32'h7F80_0000, 32'h3F80_0000, 32'h3F80_0000);
    check(32'hBF80_0000, 32'h7FC0_0000, 32'hBF80_0000);
    // larger magnitude wins, sign ignored
    check(32'h3F80_0000, 32'hC000_0000, 32'hC000_0000);
    check(32'hC080_0000, 32'h4000_0000, 32'hC080_0000);
    // same exponent, mantissa decides
    check(32'h3F80_0001, 32'h3F80_0002, 32'h3F80_0002);
    // paper example V1..V4 pairs
    check(32'h55B0_0000, 32'h5460_0000, 32'h55B0_0000);
    check(32'h15A0_0000, 32'hC7A0_0000, 32'hC7A0_0000);
    for (int i = 0; i < 20000; i++) begin
      ra = rnd_word();
      rb = rnd_word();
      if (ra[30:23] == 8'hFF && rb[30:23] == 8'hFF) e = 32'h0;
      else if (ra[30:23] == 8'hFF)                  e = rb;
      else if (rb[30:23] == 8'hFF)                  e = ra;
      else if (mag(rb) > mag(ra))                   e = rb;
      else                                          e = ra;
      check(ra, rb, e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
