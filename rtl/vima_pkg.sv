// vima_pkg: constants and types shared by the VIMA (Vector In Memory Architecture) blocks.
//
// VIMA sits on the logic layer of a 3D-stacked memory and executes vector instructions
// whose operands are whole 8 KB vectors. The sizes below are the configuration the design
// is built around: 8 KB vectors, 256 x 32-bit functional units (so one vector is 8 beats of
// 1 KB), a 64 KB fully associative operand cache of eight vector lines, 64 B sub-requests
// to 32 vaults with 8 banks each and 256 B rows. The latencies are the cycles that a whole
// 8 KB operation spends in the pipelined units.
//
// The opcode list, the element types' encoding and the instruction record are this
// design's own choices: the source architecture only says the ISA follows ARM NEON and
// supports signed/unsigned 32/64-bit integers and single/double floating point.
package vima_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned VEC_BYTES  = 8192;  // one vector operand
  localparam int unsigned LANES32    = 256;   // 32-bit functional units
  localparam int unsigned WAYS       = 8;     // vector lines in the VIMA cache (64 KB)
  localparam int unsigned SUB_BYTES  = 64;    // size of one vault sub-request
  localparam int unsigned VAULTS     = 32;
  localparam int unsigned BANKS      = 8;
  localparam int unsigned ROW_BYTES  = 256;
  localparam int unsigned ADDR_W     = 64;

  // ---------------------------------------------------------------- unit latencies
  // Cycles for a full 8-beat operation through the pipelined units. With one beat
  // entering per cycle the pipeline depth is LAT - 8 + 1.
  localparam int unsigned LAT_IALU = 8;
  localparam int unsigned LAT_IMUL = 12;
  localparam int unsigned LAT_IDIV = 28;
  localparam int unsigned LAT_FALU = 13;
  localparam int unsigned LAT_FMUL = 13;
  localparam int unsigned LAT_FDIV = 28;
  localparam int unsigned REF_BEATS = 8;  // beats the latencies above refer to

  // ---------------------------------------------------------------- operations
  typedef enum logic [3:0] {
    OP_SET = 4'd0,   // every element := scalar
    OP_MOV = 4'd1,   // dst := src1
    OP_ADD = 4'd2,
    OP_SUB = 4'd3,
    OP_MUL = 4'd4,
    OP_DIV = 4'd5,
    OP_AND = 4'd6,
    OP_OR  = 4'd7,
    OP_XOR = 4'd8,
    OP_MIN = 4'd9,
    OP_MAX = 4'd10
  } vop_e;

  typedef enum logic [2:0] {
    T_I32 = 3'd0,
    T_U32 = 3'd1,
    T_I64 = 3'd2,
    T_U64 = 3'd3,
    T_F32 = 3'd4,
    T_F64 = 3'd5
  } etype_e;

  // Unit class, selects the pipeline depth.
  typedef enum logic [1:0] {
    C_ALU = 2'd0,
    C_MUL = 2'd1,
    C_DIV = 2'd2
  } uclass_e;

  typedef enum logic [2:0] {
    EXC_NONE    = 3'd0,
    EXC_ALIGN   = 3'd1,  // a vector address is not aligned to VEC_BYTES
    EXC_MEM     = 3'd2,  // a vault answered a sub-request with an error
    EXC_DIVZERO = 3'd3,  // integer division by zero
    EXC_FPINV   = 3'd4,  // floating-point invalid operation (NaN produced)
    EXC_OPCODE  = 3'd5   // undefined opcode / element type
  } exc_e;

  typedef struct packed {
    vop_e               op;
    etype_e             etype;
    logic               use_scalar;  // second operand is the scalar broadcast
    logic [ADDR_W-1:0]  src1;
    logic [ADDR_W-1:0]  src2;
    logic [ADDR_W-1:0]  dst;
    logic [63:0]        scalar;      // 32-bit types use bits [31:0]
  } vinstr_t;

  typedef struct packed {
    logic  ok;
    exc_e  cause;
  } vstatus_t;

  // ---------------------------------------------------------------- helpers
  function automatic uclass_e op_class(vop_e op);
    case (op)
      OP_MUL:  return C_MUL;
      OP_DIV:  return C_DIV;
      default: return C_ALU;
    endcase
  endfunction

  function automatic logic is_fp(etype_e t);
    return (t == T_F32) || (t == T_F64);
  endfunction

  function automatic logic is_64(etype_e t);
    return (t == T_I64) || (t == T_U64) || (t == T_F64);
  endfunction

  // Number of vector sources read from the cache by an operation.
  function automatic int unsigned n_vec_src(vop_e op, logic use_scalar);
    if (op == OP_SET) return 0;
    if (op == OP_MOV || use_scalar) return 1;
    return 2;
  endfunction

  function automatic logic valid_op(vop_e op, etype_e t);
    if (!(op inside {OP_SET, OP_MOV, OP_ADD, OP_SUB, OP_MUL, OP_DIV,
                     OP_AND, OP_OR, OP_XOR, OP_MIN, OP_MAX})) return 1'b0;
    if (!(t inside {T_I32, T_U32, T_I64, T_U64, T_F32, T_F64})) return 1'b0;
    if (is_fp(t) && (op inside {OP_AND, OP_OR, OP_XOR})) return 1'b0;
    return 1'b1;
  endfunction

  // Pipeline depth (cycles from a beat entering the units to its result) for
  // an operation, derived from the 8 KB latencies.
  function automatic int unsigned unit_depth(vop_e op, etype_e t);
    int unsigned lat;
    if (is_fp(t)) begin
      case (op_class(op))
        C_MUL:   lat = LAT_FMUL;
        C_DIV:   lat = LAT_FDIV;
        default: lat = LAT_FALU;
      endcase
    end else begin
      case (op_class(op))
        C_MUL:   lat = LAT_IMUL;
        C_DIV:   lat = LAT_IDIV;
        default: lat = LAT_IALU;
      endcase
    end
    return lat - REF_BEATS + 1;
  endfunction

  localparam int unsigned MAX_DEPTH = LAT_IDIV - REF_BEATS + 1;  // 21

  // Assumed address map inside the cube: bits [7:0] select a byte of a 256 B row,
  // the next five bits the vault and the three above them the bank.
  function automatic int unsigned addr_vault(logic [ADDR_W-1:0] a);
    return int'((a / ADDR_W'(ROW_BYTES)) % ADDR_W'(VAULTS));
  endfunction

  function automatic int unsigned addr_bank(logic [ADDR_W-1:0] a);
    return int'((a / ADDR_W'(ROW_BYTES * VAULTS)) % ADDR_W'(BANKS));
  endfunction

endpackage
