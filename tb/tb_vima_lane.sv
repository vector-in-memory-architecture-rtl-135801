// tb_vima_lane: self-checking test of one 64-bit functional-unit slice.
//
// Random operands for every operation and element type are applied and the result is
// compared with a reference computed in the testbench: plain SystemVerilog integer
// arithmetic for the integer types, `real` arithmetic for doubles, and `real`
// arithmetic followed by a testbench rounding routine (double -> single, nearest-even)
// for singles. Operand exponents stay inside the normal range so that the unit's
// flush-to-zero convention never applies. A few special cases (inf-inf, 0/0, x/0,
// integer divide by zero) check the flags.
module tb_vima_lane;
  import vima_pkg::*;

  vop_e        op;
  etype_e      et;
  logic [63:0] a, b, r;
  logic        dz, fpx;
  int          checks = 0, failures = 0;

  vima_lane dut (.op(op), .etype(et), .a(a), .b(b), .r(r), .dz(dz), .fpx(fpx));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  function automatic logic [31:0] rnd_f32();
    return {1'($urandom), 8'(100 + $urandom % 55), 23'($urandom)};
  endfunction
  function automatic logic [63:0] rnd_f64();
    return {1'($urandom), 11'(1000 + $urandom % 47), 20'($urandom), 32'($urandom)};
  endfunction

  function automatic real ref_real(vop_e o, real x, real y);
    case (o)
      OP_ADD: return x + y;
      OP_SUB: return x - y;
      OP_MUL: return x * y;
      OP_DIV: return x / y;
      OP_MIN: return (x < y) ? x : y;
      OP_MAX: return (x > y) ? x : y;
      default: return 0.0;
    endcase
  endfunction

  function automatic logic [63:0] ref_int(vop_e o, logic sg, int w, logic [63:0] x, logic [63:0] y);
    logic signed [63:0] sx, sy;
    logic [63:0] mask, res;
    mask = (w == 64) ? '1 : 64'hffff_ffff;
    x &= mask; y &= mask;
    sx = (w == 64) ? x : {{32{x[31]}}, x[31:0]};
    sy = (w == 64) ? y : {{32{y[31]}}, y[31:0]};
    case (o)
      OP_MOV: res = x;
      OP_ADD: res = x + y;
      OP_SUB: res = x - y;
      OP_MUL: res = x * y;
      OP_DIV: res = (y == 0) ? 0 : (sg ? 64'(sx / sy) : x / y);
      OP_AND: res = x & y;
      OP_OR:  res = x | y;
      OP_XOR: res = x ^ y;
      OP_MIN: res = sg ? ((sx < sy) ? x : y) : ((x < y) ? x : y);
      OP_MAX: res = sg ? ((sx > sy) ? x : y) : ((x > y) ? x : y);
      default: res = 0;
    endcase
    return res & mask;
  endfunction

  task automatic check(string what, logic [63:0] exp, logic exp_dz, logic exp_fpx);
    checks++;
    if (r !== exp || dz !== exp_dz || fpx !== exp_fpx) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s op=%s et=%s a=%h b=%h r=%h exp=%h dz=%b fpx=%b", what, op.name(), et.name(),
                 a, b, r, exp, dz, fpx);
    end
  endtask

  vop_e iops [11] = '{OP_SET, OP_MOV, OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_AND, OP_OR, OP_XOR, OP_MIN, OP_MAX};
  vop_e fops [6]  = '{OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_MIN, OP_MAX};
  etype_e its [4] = '{T_I32, T_U32, T_I64, T_U64};

  initial begin
    logic [63:0] e;
    for (int n = 0; n < 3000; n++) begin
      // integer
      op = iops[$urandom % 11];
      et = its[$urandom % 4];
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      if ($urandom % 4 == 0) b = {32'($urandom % 7 + 1), 32'($urandom % 7 + 1)};
      #1;
      if (op == OP_SET) e = is_64(et) ? b : {b[31:0], b[31:0]};
      else if (is_64(et)) e = ref_int(op, et == T_I64, 64, a, b);
      else e = {ref_int(op, et == T_I32, 32, a[63:32], b[63:32])[31:0],
                ref_int(op, et == T_I32, 32, a[31:0], b[31:0])[31:0]};
      check("int", e, 1'b0, 1'b0);
      // single
      op = fops[$urandom % 6];
      et = T_F32;
      a = {rnd_f32(), rnd_f32()};
      b = {rnd_f32(), rnd_f32()};
      if ($urandom % 8 == 0) b[31:0] = a[31:0] ^ 32'h8000_0000;  // exact cancellation
      #1;
      e = {d2f(ref_real(op, f2d(a[63:32]), f2d(b[63:32]))), d2f(ref_real(op, f2d(a[31:0]), f2d(b[31:0])))};
      check("f32", e, 1'b0, 1'b0);
      // double
      et = T_F64;
      a = rnd_f64();
      b = rnd_f64();
      #1;
      e = $realtobits(ref_real(op, $bitstoreal(a), $bitstoreal(b)));
      if (e == 64'h8000_0000_0000_0000 && op inside {OP_ADD, OP_SUB}) e = 0;
      check("f64", e, 1'b0, 1'b0);
    end
    // special cases
    op = OP_DIV; et = T_I64; a = 64'd77; b = 0; #1; check("idiv0", 0, 1'b1, 1'b0);
    op = OP_DIV; et = T_U32; a = {32'd9, 32'd9}; b = {32'd3, 32'd0}; #1; check("udiv0", {32'd3, 32'd0}, 1'b1, 1'b0);
    op = OP_DIV; et = T_I32; a = {32'd7, -32'sd7}; b = {-32'sd2, 32'd2}; #1; check("sdiv", {-32'sd3, -32'sd3}, 1'b0, 1'b0);
    op = OP_SUB; et = T_F64; a = 64'h7ff0_0000_0000_0000; b = a; #1; check("inf-inf", 64'h7ff8_0000_0000_0000, 1'b0, 1'b1);
    op = OP_DIV; et = T_F64; a = 0; b = 0; #1; check("0/0", 64'h7ff8_0000_0000_0000, 1'b0, 1'b1);
    op = OP_DIV; et = T_F64; a = $realtobits(3.0); b = 0; #1; check("x/0", 64'h7ff0_0000_0000_0000, 1'b0, 1'b0);
    op = OP_MUL; et = T_F32; a = {32'h7f80_0000, 32'h3f80_0000}; b = {32'h0000_0000, 32'h4000_0000};
    #1; check("0*inf", {32'h7fc0_0000, 32'h4000_0000}, 1'b0, 1'b1);
    op = OP_ADD; et = T_F32; a = {32'h3f80_0000, 32'h3f80_0000}; b = {32'h3380_0000, 32'h3380_0001};
    #1; check("tie-even", {32'h3f80_0000, 32'h3f80_0001}, 1'b0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
