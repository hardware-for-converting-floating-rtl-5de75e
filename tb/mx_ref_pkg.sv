// mx_ref_pkg -- reference model used by the converter testbenches.
//
// Written apart from the RTL: element widths come from a table here, the
// mantissa rounding comes from explicit row-by-row tables (3 -> 2, 4 -> 3 and
// 2 -> 1 bits, half-way cases rounding up), and the largest input is found
// with real-number comparisons. All results are right-aligned in the
// returned vectors.
package mx_ref_pkg;
  import mx_pkg::*;

  function automatic int ref_k(mx_fmt_e f);
    case (f)
      MX_E5M2: return 5;  MX_E4M3: return 4;  MX_E3M2: return 3;
      MX_E2M3: return 2;  MX_E2M1: return 2;  default: return 1;
    endcase
  endfunction

  function automatic int ref_r(mx_fmt_e f);
    case (f)
      MX_E5M2: return 2;  MX_E4M3: return 3;  MX_E3M2: return 2;
      MX_E2M3: return 3;  MX_E2M1: return 1;  default: return 6;
    endcase
  endfunction

  // Largest exponent an element type holds (subtracted to form X).
  function automatic int ref_bias(mx_fmt_e f);
    case (f)
      MX_E5M2: return 15; MX_E4M3: return 7;  MX_E3M2: return 3;
      MX_E2M3: return 1;  MX_E2M1: return 1;  default: return 0;
    endcase
  endfunction

  // |w| as a real number, built from the fields (finite words only).
  function automatic real mag(logic [31:0] w);
    real frac;
    int  e;
    e = int'(w[30:23]);
    frac = real'(w[22:0]);
    if (e == 0) return frac * (2.0 ** -149);
    return (8388608.0 + frac) * (2.0 ** (e - 150));
  endfunction

  // Magnitude bits of the word the comparator tree should select.
  function automatic logic [30:0] ref_max(logic [31:0] v [32], int n);
    logic [31:0] best;
    bit found;
    found = 0;
    best  = '0;
    for (int i = 0; i < n; i++) begin
      if (v[i][30:23] != 8'hFF) begin
        if (!found || mag(v[i]) > mag(best)) best = v[i];
        found = 1;
      end
    end
    return best[30:0];
  endfunction

  function automatic logic [7:0] ref_x(mx_fmt_e f, logic [30:0] ev);
    int e;
    e = int'(ev[30:23]);
    if (e == 255) return (ev[22:0] == 0) ? 8'hFE : 8'hFF;
    if (e > ref_bias(f)) return 8'(e - ref_bias(f));
    return 8'd0;
  endfunction

  // Rounding table: returns {carry, mantissa} for an (R+1)-bit input.
  function automatic logic [3:0] ref_round(int r, logic [3:0] mv);
    if (r == 1) begin
      case (mv[1:0])
        2'b00: return 4'b0_000;  2'b01: return 4'b0_001;
        2'b10: return 4'b0_001;  default: return 4'b1_000;
      endcase
    end else if (r == 2) begin
      case (mv[2:0])
        3'b000: return 4'b0_000; 3'b001: return 4'b0_001;
        3'b010: return 4'b0_001; 3'b011: return 4'b0_010;
        3'b100: return 4'b0_010; 3'b101: return 4'b0_011;
        3'b110: return 4'b0_011; default: return 4'b1_000;
      endcase
    end else begin
      case (mv)
        4'b0000: return 4'b0_000; 4'b0001: return 4'b0_001;
        4'b0010: return 4'b0_001; 4'b0011: return 4'b0_010;
        4'b0100: return 4'b0_010; 4'b0101: return 4'b0_011;
        4'b0110: return 4'b0_011; 4'b0111: return 4'b0_100;
        4'b1000: return 4'b0_100; 4'b1001: return 4'b0_101;
        4'b1010: return 4'b0_101; 4'b1011: return 4'b0_110;
        4'b1100: return 4'b0_110; 4'b1101: return 4'b0_111;
        4'b1110: return 4'b0_111; default: return 4'b1_000;
      endcase
    end
  endfunction

  // Expected private element for FP32 word v under shared scale x.
  function automatic logic [7:0] ref_p(mx_fmt_e f, logic [7:0] x, logic [31:0] v);
    int k, r, b, emax, d, ek, mant, nanm, s;
    logic [3:0] mv, rc;
    k = ref_k(f);  r = ref_r(f);  b = ref_bias(f);
    emax = (1 << k) - 2;
    s    = int'(v[31]);
    mv   = 4'(v[22:0] >> (22 - r));         // top r+1 mantissa bits
    nanm = (r == 1) ? 1 : ((1 << r) - 2);
    if (x == 8'hFF) return 8'(((s << k | ((1 << k) - 1)) << r) | nanm);
    if (x == 8'hFE) return 8'((s << k | ((1 << k) - 1)) << r);
    if (s != 0) d = int'(x) + b + int'(v[30:23]);
    else   d = int'(x) + b - int'(v[30:23]);
    if (d > emax) return 8'(s << (k + r));
    if (d < 0) begin
      mant = (mv != 0) ? nanm : 0;
      return 8'(((s << k | ((1 << k) - 1)) << r) | mant);
    end
    ek = emax - d;
    rc = ref_round(r, mv);
    mant = int'(rc[2:0]);
    if (rc[3]) begin
      if (ek == emax) mant = (1 << r) - 1;
      else            ek   = ek + 1;
    end
    return 8'(((s << k | ek) << r) | mant);
  endfunction

endpackage
