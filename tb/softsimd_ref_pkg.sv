// softsimd_ref_pkg: reference arithmetic for the Soft-SIMD testbenches.
//
// Lane-by-lane models written with plain 64-bit integer arithmetic, independent
// of the carry-masking and shifter structure of the RTL. Words are up to MAXW
// bits; the datapath width dw and the lane count are arguments.
package softsimd_ref_pkg;

  localparam int MAXW = 192;
  typedef logic [MAXW-1:0] word_t;

  typedef enum int { R_ADD, R_SUB, R_SRA, R_MUL } ref_op_e;

  function automatic int lanes_of_mode(int mode);
    case (mode)
      0: return 3;
      1: return 4;
      2: return 6;
      3: return 8;
      4: return 12;
      default: return 16;
    endcase
  endfunction

  function automatic longint get_lane(word_t w, int lw, int l);
    longint v;
    v = 0;
    for (int i = 0; i < 64; i++)
      v[i] = (i < lw) ? w[l*lw+i] : w[l*lw+lw-1];
    return v;
  endfunction

  function automatic word_t ref_op(int dw, int mode, ref_op_e op, word_t a, word_t b,
                                   int shamt, longint scalar);
    word_t  y;
    int     lw;
    longint la, lb, r;
    y  = '0;
    lw = dw / lanes_of_mode(mode);
    for (int l = 0; l < dw / lw; l++) begin
      la = get_lane(a, lw, l);
      lb = get_lane(b, lw, l);
      case (op)
        R_ADD:   r = la + lb;
        R_SUB:   r = la - lb;
        R_SRA:   r = la >>> ((shamt > 63) ? 63 : shamt);
        default: r = la * scalar;
      endcase
      for (int i = 0; i < lw; i++) y[l*lw+i] = r[i];
    end
    return y;
  endfunction

  // number of non-zero digits of the canonical signed-digit form of v
  function automatic int csd_weight(longint v);
    int n;
    n = 0;
    while (v != 0) begin
      if (v % 2 != 0) begin
        longint d;
        d = ((v % 4 + 4) % 4 == 1) ? 1 : -1;
        v = v - d;
        n++;
      end
      v = v / 2;
    end
    return n;
  endfunction

  function automatic word_t rand_word();
    word_t w;
    for (int i = 0; i < MAXW / 32; i++) w[i*32 +: 32] = $urandom();
    return w;
  endfunction

endpackage
