// vima_fu_array: the VIMA vector functional units, 256 x 32-bit (128 x 64-bit) wide.
//
// One beat of operands (LANES32*32 bits, 1 KB at the default size) enters per cycle and
// one beat of results leaves per cycle, so an 8 KB vector passes in 8 beats. The lanes
// (vima_lane) compute the operation; a delay line then holds each result beat for the
// pipeline depth of the operation's unit class, so that an 8-beat operation takes
// 8/12/28 cycles for integer alu/mul/div and 13/13/28 for floating-point alu/mul/div
// (depth = latency - 8 + 1). Those latencies are the architecture's; modelling the
// pipelined unit as "compute, then delay" is this design's choice.
//
// Interface: in_valid/in_beat/in_a/in_b with op, etype, use_scalar, scalar held steady
// for the whole instruction (the sequencer waits for the last result before changing
// them). When use_scalar is set, or the op is SET, operand B is the scalar broadcast
// to every element. Outputs out_valid/out_beat/out_data with the beat's dz (integer
// division by zero) and fpx (invalid floating-point) flags, `depth` cycles after the
// beat entered. Entries that pass the current tap are dropped so a later, deeper
// operation never sees stale beats.
module vima_fu_array #(
  parameter int unsigned LANES32 = vima_pkg::LANES32,
  parameter int unsigned BEAT_W  = LANES32 * 32,
  parameter int unsigned BEATS   = vima_pkg::VEC_BYTES / (LANES32 * 4)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  vima_pkg::vop_e            op,
  input  vima_pkg::etype_e          etype,
  input  logic                      use_scalar,
  input  logic [63:0]               scalar,
  input  logic                      in_valid,
  input  logic [$clog2(BEATS)-1:0]  in_beat,
  input  logic [BEAT_W-1:0]         in_a,
  input  logic [BEAT_W-1:0]         in_b,
  output logic                      out_valid,
  output logic [$clog2(BEATS)-1:0]  out_beat,
  output logic [BEAT_W-1:0]         out_data,
  output logic                      out_dz,
  output logic                      out_fpx
);
  import vima_pkg::*;

  localparam int unsigned SLICES = LANES32 / 2;
  localparam int unsigned BW     = $clog2(BEATS);

  typedef struct packed {
    logic              v;
    logic [BW-1:0]     beat;
    logic              dz;
    logic              fpx;
    logic [BEAT_W-1:0] d;
  } stage_t;

  logic [63:0]       bcast;
  logic [BEAT_W-1:0] opb, res;
  logic [SLICES-1:0] dz_l, fpx_l;
  stage_t            pipe [MAX_DEPTH];
  int unsigned       tap;

  assign bcast = is_64(etype) ? scalar : {scalar[31:0], scalar[31:0]};
  assign opb   = (use_scalar || op == OP_SET) ? {SLICES{bcast}} : in_b;
  assign tap   = unit_depth(op, etype) - 1;

  for (genvar s = 0; s < SLICES; s++) begin : g_lane
    vima_lane u_lane (
      .op(op), .etype(etype), .a(in_a[64*s +: 64]), .b(opb[64*s +: 64]),
      .r(res[64*s +: 64]), .dz(dz_l[s]), .fpx(fpx_l[s]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_DEPTH; i++) pipe[i] <= '0;
    end else begin
      pipe[0] <= '{v: in_valid, beat: in_beat, dz: |dz_l & in_valid, fpx: |fpx_l & in_valid, d: res};
      for (int i = 1; i < MAX_DEPTH; i++) begin
        pipe[i]   <= pipe[i-1];
        pipe[i].v <= pipe[i-1].v && (i <= int'(tap));
      end
    end
  end

  assign out_valid = pipe[tap].v;
  assign out_beat  = pipe[tap].beat;
  assign out_data  = pipe[tap].d;
  assign out_dz    = pipe[tap].dz;
  assign out_fpx   = pipe[tap].fpx;

endmodule
