// vima_lane: one 64-bit slice of the VIMA vector functional units.
//
// A slice holds two 32-bit units or acts as one 64-bit unit, so 128 slices make the
// 256 32-bit units of the array. For each element it computes the selected operation
// (SET, MOV, ADD, SUB, MUL, DIV, AND, OR, XOR, MIN, MAX) on signed or unsigned integers
// or on single/double floating point (vima_fpu). Combinational: operands in, result out
// in the same cycle; the array adds the pipeline delay of the unit class.
//
// Flags: `dz` reports an integer division by zero (the quotient element is then 0),
// `fpx` an invalid floating-point operation. Integer MUL keeps the low half of the
// product; integer ADD/SUB wrap. These conventions, and SET taking its value from the
// `b` operand (the broadcast scalar), are this design's own.
module vima_lane (
  input  vima_pkg::vop_e    op,
  input  vima_pkg::etype_e  etype,
  input  logic [63:0]       a,
  input  logic [63:0]       b,
  output logic [63:0]       r,
  output logic              dz,
  output logic              fpx
);
  import vima_pkg::*;

  logic [31:0] f32_r [2];
  logic        f32_x [2];
  logic [63:0] f64_r;
  logic        f64_x;

  for (genvar h = 0; h < 2; h++) begin : g_f32
    vima_fpu #(.EW(8), .MW(23)) u_f32 (
      .op(op), .a(a[32*h +: 32]), .b(b[32*h +: 32]), .r(f32_r[h]), .inv(f32_x[h]));
  end

  vima_fpu #(.EW(11), .MW(52)) u_f64 (.op(op), .a(a), .b(b), .r(f64_r), .inv(f64_x));

  function automatic logic [63:0] int_op(vop_e o, logic sgn, logic [63:0] x, logic [63:0] y);
    case (o)
      OP_SET:  return y;
      OP_MOV:  return x;
      OP_ADD:  return x + y;
      OP_SUB:  return x - y;
      OP_MUL:  return x * y;
      OP_DIV:  begin
        if (y == '0) return '0;
        if (sgn) return 64'($signed(x) / $signed(y));
        return x / y;
      end
      OP_AND:  return x & y;
      OP_OR:   return x | y;
      OP_XOR:  return x ^ y;
      OP_MIN:  return (sgn ? ($signed(x) < $signed(y)) : (x < y)) ? x : y;
      OP_MAX:  return (sgn ? ($signed(x) > $signed(y)) : (x > y)) ? x : y;
      default: return '0;
    endcase
  endfunction

  function automatic logic [31:0] int_op32(vop_e o, logic sgn, logic [31:0] x, logic [31:0] y);
    case (o)
      OP_SET:  return y;
      OP_MOV:  return x;
      OP_ADD:  return x + y;
      OP_SUB:  return x - y;
      OP_MUL:  return x * y;
      OP_DIV:  begin
        if (y == '0) return '0;
        if (sgn) return 32'($signed(x) / $signed(y));
        return x / y;
      end
      OP_AND:  return x & y;
      OP_OR:   return x | y;
      OP_XOR:  return x ^ y;
      OP_MIN:  return (sgn ? ($signed(x) < $signed(y)) : (x < y)) ? x : y;
      OP_MAX:  return (sgn ? ($signed(x) > $signed(y)) : (x > y)) ? x : y;
      default: return '0;
    endcase
  endfunction

  always_comb begin
    r   = '0;
    dz  = 1'b0;
    fpx = 1'b0;
    if (op == OP_SET) begin
      r = is_64(etype) ? b : {b[31:0], b[31:0]};
    end else if (op == OP_MOV) begin
      r = a;
    end else begin
      case (etype)
        T_I32, T_U32: begin
          r[31:0]  = int_op32(op, etype == T_I32, a[31:0],  b[31:0]);
          r[63:32] = int_op32(op, etype == T_I32, a[63:32], b[63:32]);
          dz = (op == OP_DIV) && ((b[31:0] == '0) || (b[63:32] == '0));
        end
        T_I64, T_U64: begin
          r  = int_op(op, etype == T_I64, a, b);
          dz = (op == OP_DIV) && (b == '0);
        end
        T_F32: begin
          r   = {f32_r[1], f32_r[0]};
          fpx = f32_x[0] | f32_x[1];
        end
        T_F64: begin
          r   = f64_r;
          fpx = f64_x;
        end
        default: r = '0;
      endcase
    end
  end

endmodule
