// tb_mx_pi -- self-checking test of the private-element unit, all five
// floating-point element types at once.
// Directed: the four elements of the worked E5M2 example (X = 156 gives
// 01111010, 01101111, 00000000, 10000000), the NaN and infinity scale codes,
// saturation at the largest element. Then random scales and inputs, biased
// towards the element range, against the table-driven reference model.
module tb_mx_pi;
  import mx_pkg::*;
  import mx_ref_pkg::*;

  logic [7:0]  x;
  logic [31:0] w;            // full FP32 word driven to every unit
  logic [7:0]  p [5];
  int checks = 0, failures = 0;

  logic [7:0] p0; logic [7:0] p1; logic [5:0] p2; logic [5:0] p3; logic [3:0] p4;
  mx_pi #(.FMT(MX_E5M2)) u0 (.x(x), .v(w[31 -: 12]), .p(p0));
  mx_pi #(.FMT(MX_E4M3)) u1 (.x(x), .v(w[31 -: 13]), .p(p1));
  mx_pi #(.FMT(MX_E3M2)) u2 (.x(x), .v(w[31 -: 12]), .p(p2));
  mx_pi #(.FMT(MX_E2M3)) u3 (.x(x), .v(w[31 -: 13]), .p(p3));
  mx_pi #(.FMT(MX_E2M1)) u4 (.x(x), .v(w[31 -: 11]), .p(p4));
  assign p[0] = p0;  assign p[1] = p1;  assign p[2] = 8'(p2);
  assign p[3] = 8'(p3);  assign p[4] = 8'(p4);

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_fmt(int f, logic [7:0] exp);
    checks++;
    if (p[f] !== exp) begin
      failures++;
      $display("FAIL fmt %0d x=%0d v=%h p=%b expected %b", f, x, w, p[f], exp);
    end
  endtask

  task automatic apply(logic [7:0] tx, logic [31:0] tw);
    x = tx; w = tw;
    #1;
    for (int f = 0; f < 5; f++) check_fmt(f, ref_p(mx_fmt_e'(f), tx, tw));
  endtask

  initial begin
    // Worked example, E5M2, X = 10011100.
    x = 8'd156;
    w = {1'b0, 8'd171, 23'b011 << 20}; #1; check_fmt(0, 8'b0111_1010);
    w = {1'b0, 8'd168, 23'b110 << 20}; #1; check_fmt(0, 8'b0110_1111);
    w = {1'b0, 8'd43,  23'b001 << 20}; #1; check_fmt(0, 8'b0000_0000);
    w = {1'b1, 8'd143, 23'b001 << 20}; #1; check_fmt(0, 8'b1000_0000);
    // NaN and infinity scale codes (fixed patterns per type).
    x = 8'hFF; w = 32'h3F80_0000; #1;
    check_fmt(0, 8'b0_11111_10); check_fmt(1, 8'b0_1111_110);
    check_fmt(2, 8'b0_111_10);   check_fmt(3, 8'b0_11_110); check_fmt(4, 8'b0_11_1);
    x = 8'hFE; w = 32'hBF80_0000; #1;
    check_fmt(0, 8'b1_11111_00); check_fmt(1, 8'b1_1111_000);
    check_fmt(2, 8'b1_111_00);   check_fmt(3, 8'b1_11_000); check_fmt(4, 8'b1_11_0);
    // Largest element with all-ones rounding bits saturates (E5M2: X+15 = E).
    x = 8'd100; w = {1'b0, 8'd115, 23'h7FFFFF}; #1; check_fmt(0, 8'b0_11110_11);
    // One step below: rounding carries into the exponent.
    x = 8'd100; w = {1'b0, 8'd114, 23'h7FFFFF}; #1; check_fmt(0, 8'b0_11110_00);
    // Random.
    for (int t = 0; t < 200000; t++) begin
      logic [7:0] tx, te;
      logic [31:0] tw;
      tx = 8'($urandom);
      if ($urandom % 16 == 0) tx = ($urandom % 2 != 0) ? 8'hFF : 8'hFE;
      tw = $urandom;
      te = 8'(int'(tx) + 15 - int'($urandom % 40));
      if ($urandom % 4 != 0) tw[30:23] = te;
      if ($urandom % 8 == 0) tw[22:18] = 5'h1F;
      apply(tx, tw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
