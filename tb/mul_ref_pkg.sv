// Reference models for the approximate multiplier testbenches.
//
// The models are written from the cells' truth tables, not from their
// logic equations: a 3x3 product is the exact product except for the six
// listed entries above 31. The 8x8 model applies the slice decomposition
// A = A2*64 + A1*8 + A0 (same for B) and sums the nine slice products with
// the approximate 3x3 table, the exact 2x2 product for M8, and, in
// variant 3, no A2*B0 term.
package mul_ref_pkg;

  // MUL3x3_1: the six products above 31 are replaced (O5 = 0).
  function automatic int unsigned ref3_1(int unsigned a, int unsigned b);
    case ({a[2:0], b[2:0]})
      6'o57:   return 27;  // 35
      6'o66:   return 24;  // 36
      6'o67:   return 30;  // 42
      6'o75:   return 27;  // 35
      6'o76:   return 30;  // 42
      6'o77:   return 29;  // 49
      default: return a * b;
    endcase
  endfunction

  // MUL3x3_2: as MUL3x3_1, but the four cases with a[2:1] = b[2:1] = 11
  // get O5 = 1, O4 = 0.
  function automatic int unsigned ref3_2(int unsigned a, int unsigned b);
    case ({a[2:0], b[2:0]})
      6'o57:   return 27;
      6'o66:   return 40;
      6'o67:   return 46;
      6'o75:   return 27;
      6'o76:   return 46;
      6'o77:   return 45;
      default: return a * b;
    endcase
  endfunction

  // 8x8 aggregation, variant 1, 2 or 3.
  function automatic int unsigned ref8(int unsigned variant, int unsigned a,
                                       int unsigned b);
    int unsigned as [3];
    int unsigned bs [3];
    int unsigned s;
    as = '{a % 8, (a / 8) % 8, a / 64};
    bs = '{b % 8, (b / 8) % 8, b / 64};
    s = 0;
    for (int j = 0; j < 3; j++) begin
      for (int i = 0; i < 3; i++) begin
        int unsigned w;
        int unsigned pp;
        w = (i == 0 ? 1 : i == 1 ? 8 : 64) * (j == 0 ? 1 : j == 1 ? 8 : 64);
        if (i == 2 && j == 2)            pp = as[i] * bs[j];
        else if (variant == 1)           pp = ref3_1(as[i], bs[j]);
        else                             pp = ref3_2(as[i], bs[j]);
        if (variant == 3 && i == 2 && j == 0) pp = 0;
        s += pp * w;
      end
    end
    return s;
  endfunction

endpackage
