// vima_tb_pkg: testbench helpers shared by the VIMA testbenches: the initial content of
// memory (every 32-bit word is a normal single-precision number, so the same data serve
// integer and floating-point tests), and reference arithmetic for single precision
// (double arithmetic rounded to single, nearest-even, subnormals flushed to zero).
package vima_tb_pkg;

  function automatic logic [31:0] init_word(logic [63:0] byte_addr);
    logic [63:0] h;
    h = byte_addr * 64'h9E37_79B9_7F4A_7C15;
    h = h ^ (h >> 29);
    h = h * 64'hBF58_476D_1CE4_E5B9;
    h = h ^ (h >> 32);
    return {h[31], 8'(120 + h[30:23] % 15), h[22:0]};
  endfunction

  function automatic logic [511:0] init_block(logic [63:0] addr);
    logic [511:0] b;
    for (int i = 0; i < 16; i++) b[32*i +: 32] = init_word(addr + 64'(4 * i));
    return b;
  endfunction

  function automatic logic [31:0] d2f(real x);
    logic [63:0] d;
    logic [23:0] m;
    int          e;
    logic        g, s;
    d = $realtobits(x);
    if (x == 0.0) return {d[63], 31'b0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    g = d[28];
    s = |d[27:0];
    if (g && (s || m[0])) m = m + 1;
    if (m[23]) begin e++; m = 0; end
    if (e >= 255) return {d[63], 8'hff, 23'b0};
    if (e <= 0) return {d[63], 31'b0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic real f2d(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'b0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] fadd32(logic [31:0] a, logic [31:0] b);
    logic [31:0] r;
    r = d2f(f2d(a) + f2d(b));
    return (r == 32'h8000_0000) ? 32'h0 : r;
  endfunction

  function automatic logic [31:0] fmul32(logic [31:0] a, logic [31:0] b);
    return d2f(f2d(a) * f2d(b));
  endfunction

endpackage
