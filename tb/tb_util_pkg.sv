// tb_util_pkg: helpers shared by the testbenches.
//
// hash32() is a small integer mixing function. Weight memory contents are
// defined by it rather than stored: 32-bit chunk j of word `addr` on memory
// port `port` is hash32(port, addr, j). Testbenches and the memory model call
// the same function, so the reference model knows every weight without a
// table. ref_op() and ref_bn() are the reference arithmetic of one weight
// operator and of BN + saturated truncation, written from the operator table
// (Dout = Din, ~Din or 0) and from y = scale*x + bias, independently of the RTL.
package tb_util_pkg;

  function automatic logic [31:0] hash32(int unsigned a, int unsigned b, int unsigned c);
    logic [31:0] x;
    x = a * 32'h9E3779B1 ^ (b * 32'h85EBCA77) ^ ((c + 32'd17) * 32'hC2B2AE3D);
    x = x ^ (x >> 15);
    x = x * 32'h2C1B3C6D;
    x = x ^ (x >> 12);
    x = x * 32'h297A2D39;
    x = x ^ (x >> 15);
    return x;
  endfunction

  // Weight field `idx` (each wb bits wide) of memory word `addr` on `port`.
  function automatic int unsigned mem_field(int port, int addr, int idx, int wb);
    int unsigned bit0, v;
    v = 0;
    bit0 = idx * wb;
    for (int b = 0; b < wb; b++) begin
      logic [31:0] chunk;
      chunk = hash32(port, addr, (bit0 + b) / 32);
      v |= int'(chunk[(bit0 + b) % 32]) << b;
    end
    return v;
  endfunction

  // mode: 0 binary, 1 ternary, 2 8-bit. d is the unsigned activation.
  function automatic longint ref_op(int mode, int unsigned w, longint d);
    case (mode)
      0: return (w & 1) ? -d - 1 : d;
      1: return ((w & 3) == 1) ? d : ((w & 3) == 3) ? -d - 1 : 0;
      default: return d * longint'($signed(8'(w)));
    endcase
  endfunction

  // Wrap to a signed acc_w-bit accumulator.
  function automatic longint wrap(longint v, int acc_w);
    longint m;
    m = longint'(1) << acc_w;
    v = v & (m - 1);
    if (v >= (m >> 1)) v -= m;
    return v;
  endfunction

  // BN and saturated truncation. Returns the output code; sat is set when the
  // value was clipped.
  function automatic longint ref_bn(longint acc, int scale, int bias, int blsh, int rsh,
                                    bit relu, int out_w, output bit sat);
    longint y, lo, hi;
    y = acc * scale + (longint'(bias) <<< blsh);
    y = y >>> rsh;
    if (relu) begin lo = 0; hi = (longint'(1) << out_w) - 1; end
    else begin hi = (longint'(1) << (out_w - 1)) - 1; lo = -hi - 1; end
    sat = 1'b0;
    if (y < lo) begin y = lo; sat = !relu; end
    else if (y > hi) begin y = hi; sat = 1'b1; end
    return y;
  endfunction

endpackage
