// tb_mx_private_elems -- self-checking test of the 32-element private stage
// (E4M3 and E2M1 instances): every element of random blocks is checked
// against the reference model, so a wrong slice or a swapped element shows.
module tb_mx_private_elems;
  import mx_pkg::*;
  import mx_ref_pkg::*;

  localparam int N = 32;
  logic [7:0]  x;
  logic [31:0] v [N];
  logic [7:0]  pa [N];
  logic [3:0]  pb [N];
  int checks = 0, failures = 0;

  mx_private_elems #(.FMT(MX_E4M3), .N(N)) ua (.x(x), .v(v), .p(pa));
  mx_private_elems #(.FMT(MX_E2M1), .N(N)) ub (.x(x), .v(v), .p(pb));

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      x = 8'(20 + $urandom % 200);
      if (t % 50 == 0) x = 8'hFF;
      if (t % 50 == 1) x = 8'hFE;
      foreach (v[i]) begin
        v[i] = $urandom;
        v[i][30:23] = 8'(int'(x) + 7 - int'($urandom % 12));
      end
      #1;
      foreach (v[i]) begin
        checks += 2;
        if (pa[i] !== ref_p(MX_E4M3, x, v[i])) begin
          failures++;
          $display("FAIL E4M3 element %0d x=%0d v=%h p=%b", i, x, v[i], pa[i]);
        end
        if (8'(pb[i]) !== ref_p(MX_E2M1, x, v[i])) begin
          failures++;
          $display("FAIL E2M1 element %0d x=%0d v=%h p=%b", i, x, v[i], pb[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
