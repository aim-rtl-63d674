// tb_bigmul_pkg: reference arithmetic for the multiplier testbenches.
//
// Numbers are dynamic arrays of 32-bit limbs, least significant first. The
// reference product is plain schoolbook multiplication on 32-bit limbs with
// 64-bit intermediates, independent of the 31-bit segmentation used by the
// hardware. Helpers build random operands with a few special patterns and
// convert between limbs and 512-bit memory words.
package tb_bigmul_pkg;

  typedef int unsigned limbs_t [];
  typedef logic [511:0] ddrw_t;

  function automatic limbs_t ref_mul(input limbs_t a, input limbs_t b);
    limbs_t p;
    longint unsigned t, c;
    p = new[a.size() + b.size()];
    foreach (p[i]) p[i] = 0;
    for (int i = 0; i < a.size(); i++) begin
      c = 0;
      for (int j = 0; j < b.size(); j++) begin
        t = longint'(p[i+j]) + longint'(a[i]) * longint'(b[j]) + c;
        p[i+j] = t[31:0];
        c = t >> 32;
      end
      p[i + b.size()] = c[31:0];
    end
    return p;
  endfunction

  // kind 0: random, 1: all ones, 2: zero, 3: sparse random, 4: single top bit
  function automatic limbs_t make_operand(input int nbits, input int kind);
    limbs_t a;
    a = new[nbits / 32];
    foreach (a[i]) begin
      case (kind)
        1: a[i] = 32'hFFFF_FFFF;
        2: a[i] = 0;
        3: a[i] = ($urandom_range(0, 7) == 0) ? $urandom : 0;
        4: a[i] = (i == nbits / 32 - 1) ? 32'h8000_0000 : 0;
        default: a[i] = $urandom;
      endcase
    end
    return a;
  endfunction

  function automatic ddrw_t limbs_word(input limbs_t a, input int w);
    ddrw_t d;
    for (int i = 0; i < 16; i++) d[i*32 +: 32] = a[w*16 + i];
    return d;
  endfunction

endpackage
