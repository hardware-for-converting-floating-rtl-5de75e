// tb_fp32_to_mx_formats -- the converter built for each of the five
// floating-point element types (E5M2, E4M3, E3M2, E2M3, E2M1), 32 inputs
// each, all fed the same random FP32 blocks. X and every element of every
// instance are checked against the reference model.
module tb_fp32_to_mx_formats;
  import mx_pkg::*;
  import mx_ref_pkg::*;

  localparam int N = 32;
  logic [31:0] v [N];
  logic [7:0]  x [5];
  logic [7:0]  p0 [N];
  logic [7:0]  p1 [N];
  logic [5:0]  p2 [N];
  logic [5:0]  p3 [N];
  logic [3:0]  p4 [N];
  int checks = 0, failures = 0;

  fp32_to_mx #(.FMT(MX_E5M2)) u0 (.v(v), .x(x[0]), .p(p0));
  fp32_to_mx #(.FMT(MX_E4M3)) u1 (.v(v), .x(x[1]), .p(p1));
  fp32_to_mx #(.FMT(MX_E3M2)) u2 (.v(v), .x(x[2]), .p(p2));
  fp32_to_mx #(.FMT(MX_E2M3)) u3 (.v(v), .x(x[3]), .p(p3));
  fp32_to_mx #(.FMT(MX_E2M1)) u4 (.v(v), .x(x[4]), .p(p4));

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] elem(int f, int i);
    case (f)
      0: return p0[i];  1: return p1[i];  2: return 8'(p2[i]);
      3: return 8'(p3[i]);  default: return 8'(p4[i]);
    endcase
  endfunction

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int base;
      logic [30:0] mx;
      base = 30 + int'($urandom % 200);
      foreach (v[i]) begin
        v[i] = $urandom;
        v[i][30:23] = 8'(base - int'($urandom % 20));
      end
      if (t % 9 == 0) v[$urandom % N][30:23] = 8'hFF;
      #1;
      mx = ref_max(v, N);
      for (int f = 0; f < 5; f++) begin
        logic [7:0] ex;
        ex = ref_x(mx_fmt_e'(f), mx);
        checks++;
        if (x[f] !== ex) begin
          failures++;
          $display("FAIL fmt %0d X=%0d expected %0d", f, x[f], ex);
        end
        for (int i = 0; i < N; i++) begin
          checks++;
          if (elem(f, i) !== ref_p(mx_fmt_e'(f), ex, v[i])) begin
            failures++;
            $display("FAIL fmt %0d element %0d v=%h", f, i, v[i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
