// sparq_ref_pkg: reference arithmetic for the Sparq testbenches.
//
// Computes, element by element with plain integer arithmetic, what a 64-bit
// lane word should hold after one vector operation. It is written from the
// RVV 1.0 definitions and the vmacsr definition
//   vd <- vd + (((vs1 * vs2) mod 2^SEW) >> SEW/2)
// and shares no code with the RTL. a is the vs1 / scalar operand, b is vs2,
// c the old vd.
package sparq_ref_pkg;
  import sparq_pkg::*;

  function automatic longint unsigned emask(input int w);
    return (w == 64) ? 64'hFFFF_FFFF_FFFF_FFFF : ((64'd1 << w) - 1);
  endfunction

  function automatic longint signed sext(input longint unsigned x, input int w);
    if (w == 64) return longint'(x);
    if (x[w-1]) return longint'(x | ~emask(w));
    return longint'(x);
  endfunction

  function automatic longint unsigned ref_elem(input op_e op, input longint unsigned a,
      input longint unsigned b, input longint unsigned c, input int w);
    longint unsigned m, r, p, sh;
    longint signed sa, sb;
    m  = emask(w);
    a &= m; b &= m; c &= m;
    p  = (a * b) & m;
    sh = a & 64'(w - 1);
    sa = sext(a, w);
    sb = sext(b, w);
    case (op)
      OP_VADD:   r = b + a;
      OP_VSUB:   r = b - a;
      OP_VAND:   r = b & a;
      OP_VOR:    r = b | a;
      OP_VXOR:   r = b ^ a;
      OP_VSLL:   r = b << sh;
      OP_VSRL:   r = b >> sh;
      OP_VSRA:   r = longint'(sb >>> sh);
      OP_VMV:    r = a;
      OP_VMUL:   r = p;
      OP_VMACC:  r = c + p;
      OP_VNMSAC: r = c - p;
      OP_VMACSR: r = c + (p >> (w / 2));
      OP_VDIVU:  r = (a == 0) ? m : b / a;
      OP_VREMU:  r = (a == 0) ? b : b % a;
      OP_VDIV: begin
        if (a == 0) r = m;
        else if (sa == -1 && b == (64'd1 << (w - 1))) r = b;
        else r = longint'(sb / sa);
      end
      OP_VREM: begin
        if (a == 0) r = b;
        else if (sa == -1 && b == (64'd1 << (w - 1))) r = 0;
        else r = longint'(sb % sa);
      end
      default:   r = 0;
    endcase
    return r & m;
  endfunction

  function automatic logic [63:0] ref_word(input op_e op, input logic [63:0] a,
      input logic [63:0] b, input logic [63:0] c, input vew_e sew);
    int w;
    logic [63:0] r;
    w = 8 << sew;
    r = '0;
    for (int i = 0; i < 64 / w; i++)
      r |= ref_elem(op, (a >> (i * w)), (b >> (i * w)), (c >> (i * w)), w) << (i * w);
    return r;
  endfunction

  function automatic logic [63:0] rand64();
    return {$urandom, $urandom};
  endfunction

endpackage
