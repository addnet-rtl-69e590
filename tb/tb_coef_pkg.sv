// tb_coef_pkg: reference models shared by the testbenches.
//
// coef(arch, s) gives the multiplier coefficient selected by index s for the
// 2-, 3- and 4-Add multipliers, computed arithmetically from the
// configuration table (per-stage multiples of x), independently of the RTL
// structure. requant() is the output scaling of a layer: ReLU result times
// lambda, divided by 2^shift rounding half up, clipped to 255.
package tb_coef_pkg;

  function automatic int coef(int arch, int sel);
    int a1, a2, a3;
    int t21[4] = '{5, 6, 12, 4};
    int t31[4] = '{9, 12, 16, 4};
    int t32[4] = '{2, 3, 9, 0};
    int t41[4] = '{2, 3, 9, -7};
    int t42[4] = '{3, 4, 10, 0};
    case (arch)
      2: begin
        a1 = t21[sel & 3];
        case ((sel >> 2) & 3)
          0: return -a1 + 4;
          1: return -8 * a1 + 4;
          2: return a1 - 4;
          default: return 8 * a1 - 4;
        endcase
      end
      3: begin
        a1 = t31[sel & 3];
        a2 = t32[(sel >> 2) & 3];
        case ((sel >> 4) & 3)
          0: return -a1 + a2;
          1: return -8 * a1 + a2;
          2: return a1 - a2;
          default: return 8 * a1 - a2;
        endcase
      end
      default: begin
        a1 = t41[sel & 3];
        a2 = t42[(sel >> 2) & 3];
        case ((sel >> 4) & 3)
          0: a3 = a1 + 8 * a2;
          1: a3 = 2 * a1 + 8 * a2;
          2: a3 = 8 * a1 + 8 * a2;
          default: a3 = -a1 + 8 * a2;
        endcase
        case ((sel >> 6) & 3)
          0: return -a3 + 2;
          1: return -8 * a3 + 2;
          2: return a3 - 2;
          default: return 8 * a3 - 2;
        endcase
      end
    endcase
  endfunction

  function automatic int requant(longint acc, int lambda, int shift);
    longint v;
    if (acc < 0) acc = 0;
    v = acc * lambda;
    if (shift > 0) v = (v + (longint'(1) << (shift - 1))) >>> shift;
    return (v > 255) ? 255 : int'(v);
  endfunction

endpackage
