// tb_mx_div -- self-checking test of the shared-scale unit for all six
// element types. Directed values are the worked numbers of the design
// description (E = 171 -> X = 156 and E = 226 -> X = 211 for E5M2, the
// E = 25..30 -> X = 10..15 lines of the block diagram, the end points of the
// FP32-to-X table); then every exponent with random mantissas.
module tb_mx_div;
  import mx_pkg::*;
  import mx_ref_pkg::*;

  logic [30:0] ev;
  logic [7:0]  x [6];
  int checks = 0, failures = 0;

  mx_div #(.FMT(MX_E5M2)) u0 (.ev(ev), .x(x[0]));
  mx_div #(.FMT(MX_E4M3)) u1 (.ev(ev), .x(x[1]));
  mx_div #(.FMT(MX_E3M2)) u2 (.ev(ev), .x(x[2]));
  mx_div #(.FMT(MX_E2M3)) u3 (.ev(ev), .x(x[3]));
  mx_div #(.FMT(MX_E2M1)) u4 (.ev(ev), .x(x[4]));
  mx_div #(.FMT(MX_INT8)) u5 (.ev(ev), .x(x[5]));

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_x(int f, logic [7:0] e, logic [22:0] m, logic [7:0] exp);
    ev = {e, m};
    #1;
    checks++;
    if (x[f] !== exp) begin
      failures++;
      $display("FAIL fmt %0d E=%0d m=%h X=%0d expected %0d", f, e, m, x[f], exp);
    end
  endtask

  initial begin
    // Worked examples (E5M2).
    expect_x(0, 8'd171, 23'h300000, 8'd156);
    expect_x(0, 8'd11,  23'h0,      8'd0);
    expect_x(0, 8'd226, 23'h1,      8'd211);
    for (int e = 25; e <= 30; e++) expect_x(0, 8'(e), 23'h5, 8'(e - 15));
    // Table end points: order 254 and the first order giving X = 1.
    expect_x(0, 8'd254, 23'h0, 8'd239);  expect_x(0, 8'd16, 23'h0, 8'd1);
    expect_x(0, 8'd15,  23'h0, 8'd0);
    expect_x(1, 8'd254, 23'h0, 8'd247);  expect_x(1, 8'd8,  23'h0, 8'd1);
    expect_x(2, 8'd254, 23'h0, 8'd251);  expect_x(2, 8'd4,  23'h0, 8'd1);
    expect_x(3, 8'd254, 23'h0, 8'd253);  expect_x(3, 8'd2,  23'h0, 8'd1);
    expect_x(4, 8'd254, 23'h0, 8'd253);  expect_x(4, 8'd1,  23'h0, 8'd0);
    expect_x(5, 8'd1,   23'h0, 8'd1);    expect_x(5, 8'd0,  23'h0, 8'd0);
    // Special codes: NaN when the mantissa is non-zero, infinity otherwise.
    for (int f = 0; f < 6; f++) begin
      expect_x(f, 8'hFF, 23'h0,      8'hFE);
      expect_x(f, 8'hFF, 23'h000001, 8'hFF);
      expect_x(f, 8'hFF, 23'h400000, 8'hFF);
    end
    // Exhaustive exponents, random mantissas, against the reference.
    for (int e = 0; e < 256; e++) begin
      for (int t = 0; t < 4; t++) begin
        logic [22:0] m;
        m = (t == 0) ? 23'h0 : 23'($urandom);
        for (int f = 0; f < 6; f++)
          expect_x(f, 8'(e), m, ref_x(mx_fmt_e'(f), {8'(e), m}));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
