// tb_totem_ref_pkg: reference arithmetic for the Totem testbenches.
//
// Everything here is written from the definitions, not from the RTL:
// eta(x) via $clog2, the plog fraction via integer division, the antilog
// via real arithmetic, the table address via integer division with
// floor rounding. The testbenches compare the hardware against these.
package tb_totem_ref_pkg;

  localparam int PF = 3;          // plog fraction bits
  localparam int PI = 4;          // plog integer bits

  // eta(m) for m > 0: 2^eta <= m < 2^(eta+1).
  function automatic int ref_eta(longint unsigned m);
    return $clog2(m + 1) - 1;
  endfunction

  // plog code of a 16-bit two's complement sample.
  function automatic logic [7:0] ref_plog_enc(int x);
    longint unsigned m;
    int e, fr;
    logic [7:0] c;
    if (x == 0) return 8'hFF;
    m  = (x < 0) ? longint'(-x) : longint'(x);
    e  = ref_eta(m);
    fr = int'((m * (1 << PF)) / (longint'(1) << e)) % (1 << PF);
    c  = {(x < 0) ? 1'b1 : 1'b0, 4'(e), 3'(fr)};
    if (c == 8'hFF) c = 8'hFE;
    return c;
  endfunction

  // Value a plog code stands for, as a real (0 for the zero code).
  function automatic real ref_plog_val(logic [7:0] c);
    real v;
    if (c == 8'hFF) return 0.0;
    v = (1.0 + real'(c[2:0]) / 8.0) * (2.0 ** real'(c[6:3]));
    return c[7] ? -v : v;
  endfunction

  // Magnitude from log value lg (IW.F fixed point), truncated, saturated.
  function automatic longint ref_antilog(int lg, int out_w);
    real v;
    longint r;
    v = (1.0 + real'(lg % 8) / 8.0) * (2.0 ** real'(lg / 8));
    r = longint'($floor(v));
    if (r > (longint'(1) << (out_w - 1)) - 1) r = (longint'(1) << (out_w - 1)) - 1;
    return r;
  endfunction

  // plog product of two codes, 32-bit two's complement.
  function automatic int ref_plog_mul(logic [7:0] a, logic [7:0] b);
    longint m;
    if (a == 8'hFF || b == 8'hFF) return 0;
    m = ref_antilog(int'(a[6:0]) + int'(b[6:0]), 32);
    return (a[7] ^ b[7]) ? -int'(m) : int'(m);
  endfunction

  // Product of a sample and a weight word in either arithmetic.
  function automatic int ref_prod(bit plog, int x, logic [7:0] w);
    if (plog) return ref_plog_mul(ref_plog_enc(x), w);
    return x * int'($signed(w));
  endfunction

  // Table address for a sum and a shift (floor division, saturation).
  function automatic int ref_lut_addr(int acc, int shift, int aw);
    longint s;
    longint d;
    d = longint'(1) << shift;
    s = longint'(acc) / d;
    if ((longint'(acc) % d) != 0 && acc < 0) s = s - 1;
    if (s > (1 << (aw - 1)) - 1) s = (1 << (aw - 1)) - 1;
    if (s < -(1 << (aw - 1)))    s = -(1 << (aw - 1));
    return int'(s + (1 << (aw - 1)));
  endfunction

  // Table contents used by the board testbenches: a logistic sigmoid
  // 255 / (1 + e^(-s/64)) of the signed table index s, rounded down; it
  // keeps fed-back samples in 0..255.
  function automatic logic [15:0] ref_act(int addr, int aw);
    int s;
    s = addr - (1 << (aw - 1));
    return 16'(int'($floor(255.0 / (1.0 + $exp(-real'(s) / 64.0)))));
  endfunction

endpackage
