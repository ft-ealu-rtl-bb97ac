// ftealu_ref_pkg -- untimed reference model of the FT-EALU for testbenches.
//
// Computes, with plain integer arithmetic on longint, what the three
// execution versions of one operation deliver when the shared ALU carries
// given stuck-at faults, and what the weighted vote of them is.  It follows
// the algorithm step by step (raw, shifted, halved-shifted operands; shift
// back; join halves; weighted average >= 0.5) and is written independently
// of the RTL's structure.  Widths up to 30 bits.
package ftealu_ref_pkg;
  import ftealu_pkg::*;

  typedef struct {
    longint fa_sa0, fa_sa1, fb_sa0, fb_sa1, fy_sa0, fy_sa1;
  } faults_t;

  function automatic longint msk(int n);
    return (longint'(1) << n) - 1;
  endfunction

  function automatic longint stuck(longint v, longint sa0, longint sa1);
    return (v & ~sa0) | sa1;
  endfunction

  // Shared ALU of width w+1 with the faults applied at its pins.
  function automatic longint alu(alu_op_e op, longint x, longint y, longint c,
                                 int w, faults_t f);
    longint m, xf, yf, r;
    m  = msk(w + 1);
    xf = stuck(x, f.fa_sa0, f.fa_sa1) & m;
    yf = stuck(y, f.fb_sa0, f.fb_sa1) & m;
    case (op)
      OP_AND:  r = xf & yf;
      OP_OR:   r = xf | yf;
      OP_XOR:  r = xf ^ yf;
      OP_NOT:  r = ~xf;
      OP_ADD:  r = xf + yf + c;
      OP_SUB:  r = xf - yf - c;
      default: r = 0;
    endcase
    return stuck(r & m, f.fy_sa0, f.fy_sa1) & m;
  endfunction

  // The fault-free result the operation should give (WIDTH bits).
  function automatic longint golden_of(alu_op_e op, longint a, longint b, int w);
    longint r;
    case (op)
      OP_AND:  r = a & b;
      OP_OR:   r = a | b;
      OP_XOR:  r = a ^ b;
      OP_NOT:  r = ~a;
      OP_ADD:  r = a + b;
      OP_SUB:  r = a - b;
      default: r = 0;
    endcase
    return r & msk(w);
  endfunction

  // The three adapted results R_V1, R_V2, R_V3.
  function automatic void versions(alu_op_e op, longint a, longint b, int w,
                                   faults_t f, output longint r1,
                                   output longint r2, output longint r3);
    int     h;
    longint al, ah, bl, bh, y, lo, hi, c;
    h  = w / 2;
    r1 = alu(op, a, b, 0, w, f) & msk(w);
    r2 = (alu(op, a << 1, b << 1, 0, w, f) >> 1) & msk(w);
    al = a & msk(h);  ah = (a >> h) & msk(h);
    bl = b & msk(h);  bh = (b >> h) & msk(h);
    y  = alu(op, al << 1, bl << 1, 0, w, f);
    lo = (y >> 1) & msk(h);
    c  = (op == OP_ADD || op == OP_SUB) ? ((y >> (h + 1)) & 1) : 0;
    if (op == OP_ADD)      y = alu(op, (ah << 1) | c, bh << 1, c, w, f);
    else if (op == OP_SUB) y = alu(op, ah << 1, (bh << 1) | c, c, w, f);
    else                   y = alu(op, ah << 1, bh << 1, 0, w, f);
    hi = (y >> 1) & msk(h);
    r3 = (hi << h) | lo;
  endfunction

  // Bitwise weighted vote; wt[v][i] are the weights as real numbers.
  function automatic longint vote(longint r1, longint r2, longint r3, int w,
                                  real wt[3][32]);
    longint res, rr[3];
    real    num, den;
    rr  = '{r1, r2, r3};
    res = 0;
    for (int i = 0; i < w; i++) begin
      num = 0.0; den = 0.0;
      for (int v = 0; v < 3; v++) begin
        den += wt[v][i];
        if (((rr[v] >> i) & 1) != 0) num += wt[v][i];
      end
      if (den == 0.0 || num / den >= 0.5) res |= longint'(1) << i;
    end
    return res;
  endfunction

endpackage
