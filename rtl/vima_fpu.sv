// vima_fpu: one IEEE-754 binary floating-point unit (add, sub, mul, div, min, max),
// parameterised by exponent and fraction width (8/23 single, 11/52 double).
//
// Combinational. Operands are unpacked, subnormal inputs are treated as zero, the
// exact result is formed on a wide significand (alignment with a sticky bit for
// add/sub, full product for mul, long quotient plus remainder sticky for div) and a
// shared normalise-and-round step rounds to nearest, ties to even. Results below the
// normal range become a signed zero; results above it become infinity. Any NaN result
// is the canonical quiet NaN. `inv` flags an invalid operation (inf-inf, 0*inf, 0/0,
// inf/inf) so that the instruction can end with an exception.
//
// The source architecture gives the number of floating-point units and their pipelined
// latency, not their insides; flush-to-zero and the flag set are this design's choice.
// Pipelining is added outside this unit (see vima_fu_array).
module vima_fpu #(
  parameter int unsigned EW = 8,
  parameter int unsigned MW = 23
) (
  input  vima_pkg::vop_e    op,
  input  logic [EW+MW:0]    a,
  input  logic [EW+MW:0]    b,
  output logic [EW+MW:0]    r,
  output logic              inv
);
  import vima_pkg::*;

  localparam int unsigned N    = EW + MW + 1;
  localparam int unsigned W    = 2 * MW + 5;           // working significand width
  localparam int          BIAS = (1 << (EW - 1)) - 1;
  localparam int          EMAX = (1 << EW) - 1;

  typedef struct packed {
    logic          s;
    logic          zero;
    logic          inf;
    logic          nan;
    logic [MW:0]   m;   // with hidden bit
    int            e;   // biased exponent
  } fp_t;

  function automatic fp_t unpack(logic [N-1:0] x);
    fp_t u;
    u.s    = x[N-1];
    u.e    = int'(x[N-2:MW]);
    u.zero = (x[N-2:MW] == '0);
    u.inf  = (x[N-2:MW] == '1) && (x[MW-1:0] == '0);
    u.nan  = (x[N-2:MW] == '1) && (x[MW-1:0] != '0);
    u.m    = {1'b1, x[MW-1:0]};
    return u;
  endfunction

  function automatic logic [N-1:0] qnan();
    return {1'b0, {EW{1'b1}}, 1'b1, {(MW-1){1'b0}}};
  endfunction

  function automatic logic [N-1:0] infv(logic s);
    return {s, {EW{1'b1}}, {MW{1'b0}}};
  endfunction

  // value = m / 2^(W-1) * 2^(e - BIAS)
  function automatic logic [N-1:0] norm_round(logic s, int e, logic [W-1:0] m);
    logic [W-1:0] mm;
    int           ee;
    logic [MW:0]  frac;
    logic         g, st, up;
    mm = m;
    ee = e;
    if (mm == '0) return {s, {(N-1){1'b0}}};
    for (int i = 0; i < W; i++) begin
      if (!mm[W-1]) begin
        mm = mm << 1;
        ee = ee - 1;
      end
    end
    frac = {1'b0, mm[W-2 -: MW]};
    g    = mm[W-2-MW];
    st   = |mm[W-3-MW:0];
    up   = g && (st || frac[0]);
    frac = frac + (MW+1)'(up);
    if (frac[MW]) ee = ee + 1;      // 1.11..1 rounded up to 10.0..0
    if (ee >= EMAX) return infv(s);
    if (ee <= 0) return {s, {(N-1){1'b0}}};
    return {s, EW'(ee), frac[MW-1:0]};
  endfunction

  // magnitude comparison a < b on packed encodings (no NaN)
  function automatic logic lt(logic [N-1:0] x, logic [N-1:0] y);
    logic xz, yz;
    xz = (x[N-2:MW] == '0);
    yz = (y[N-2:MW] == '0);
    if (xz && yz) return 1'b0;
    if (xz) return !y[N-1];
    if (yz) return x[N-1];
    if (x[N-1] != y[N-1]) return x[N-1];
    if (!x[N-1]) return x[N-2:0] < y[N-2:0];
    return x[N-2:0] > y[N-2:0];
  endfunction

  fp_t ua, ub;
  logic [W:0]   ma, mb, sum;
  logic [W-1:0] mlo, sh, prod;
  logic [2*W-1:0] quo_n, quo_q;
  logic [MW:0]  quo_r;
  int           d, eb_big;
  logic         sb, big_a, stk;

  always_comb begin
    ua  = unpack(a);
    ub  = unpack(b);
    r   = '0;
    inv = 1'b0;
    ma = '0; mb = '0; sum = '0; mlo = '0; sh = '0; prod = '0;
    quo_n = '0; quo_q = '0; quo_r = '0;
    d = 0; eb_big = 0; sb = 1'b0; big_a = 1'b0; stk = 1'b0;
    case (op)
      OP_ADD, OP_SUB: begin
        sb = ub.s ^ (op == OP_SUB);
        if (ua.nan || ub.nan) r = qnan();
        else if (ua.inf && ub.inf) begin
          if (ua.s != sb) begin r = qnan(); inv = 1'b1; end
          else r = infv(ua.s);
        end
        else if (ua.inf) r = infv(ua.s);
        else if (ub.inf) r = infv(sb);
        else if (ua.zero && ub.zero) r = {ua.s & sb, {(N-1){1'b0}}};
        else if (ua.zero) r = {sb, b[N-2:0]};
        else if (ub.zero) r = a;
        else begin
          big_a = (ua.e > ub.e) || ((ua.e == ub.e) && (ua.m >= ub.m));
          // significand with hidden bit at W-1, one headroom bit at W
          ma = {1'b0, big_a ? ua.m : ub.m, {(W-MW-1){1'b0}}};
          mlo = {big_a ? ub.m : ua.m, {(W-MW-1){1'b0}}};
          d  = big_a ? (ua.e - ub.e) : (ub.e - ua.e);
          eb_big = big_a ? ua.e : ub.e;
          if (d >= W) begin
            sh = '0; stk = (mlo != '0);
          end else begin
            sh  = mlo >> d;
            stk = ((sh << d) != mlo);
          end
          mb = {1'b0, sh[W-1:1], sh[0] | stk};
          if ((big_a ? ua.s : sb) == (big_a ? sb : ua.s)) sum = ma + mb;
          else sum = ma - mb;
          if (sum[W]) r = norm_round(big_a ? ua.s : sb, eb_big + 1, {sum[W:2], sum[1] | sum[0]});
          else if (sum == '0) r = '0;
          else r = norm_round(big_a ? ua.s : sb, eb_big, sum[W-1:0]);
        end
      end
      OP_MUL: begin
        sb = ua.s ^ ub.s;
        if (ua.nan || ub.nan) r = qnan();
        else if ((ua.inf && ub.zero) || (ub.inf && ua.zero)) begin r = qnan(); inv = 1'b1; end
        else if (ua.inf || ub.inf) r = infv(sb);
        else if (ua.zero || ub.zero) r = {sb, {(N-1){1'b0}}};
        else begin
          prod = {W'(ua.m) * W'(ub.m)} << 3;   // product in [1,4): integer bits at W-1..W-2
          r = norm_round(sb, ua.e + ub.e - BIAS + 1, prod);
        end
      end
      OP_DIV: begin
        sb = ua.s ^ ub.s;
        if (ua.nan || ub.nan) r = qnan();
        else if ((ua.inf && ub.inf) || (ua.zero && ub.zero)) begin r = qnan(); inv = 1'b1; end
        else if (ua.inf || ub.zero) r = infv(sb);
        else if (ua.zero || ub.inf) r = {sb, {(N-1){1'b0}}};
        else begin
          quo_n = (2*W)'(ua.m) << (W - 2);
          quo_q = quo_n / (2*W)'(ub.m);
          quo_r = (MW+1)'(quo_n % (2*W)'(ub.m));
          r = norm_round(sb, ua.e - ub.e + BIAS + 1, {quo_q[W-1:1], quo_q[0] | (quo_r != '0)});
        end
      end
      OP_MIN, OP_MAX: begin
        if (ua.nan && ub.nan) r = qnan();
        else if (ua.nan) r = b;
        else if (ub.nan) r = a;
        else if ((op == OP_MIN) == lt(a, b)) r = a;
        else r = b;
      end
      default: r = '0;
    endcase
  end

endmodule
