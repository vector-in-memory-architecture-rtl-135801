// tb_vima_fu_array: self-checking test of the vector unit array (16 lanes of 32 bits).
//
// For several operations (one per unit class and type family) it streams 8 beats of
// random operands back to back, checks every result element against a reference
// computed here, and checks that the last result leaves the array exactly at the
// 8-beat latency of the class: 8/12/28 cycles for integer alu/mul/div and 13/13/28
// for floating-point alu/mul/div. It also checks scalar broadcast, SET, the integer
// divide-by-zero flag, and that a shallow operation after a deep one sees no stale beats.
module tb_vima_fu_array;
  import vima_pkg::*;

  localparam int unsigned L  = 16;
  localparam int unsigned BW = L * 32;
  localparam int unsigned NB = 8;

  logic clk = 0, rst_n = 0;
  vop_e op; etype_e et; logic use_scalar; logic [63:0] scalar;
  logic in_valid; logic [6:0] in_beat; logic [BW-1:0] in_a, in_b;
  logic out_valid; logic [6:0] out_beat; logic [BW-1:0] out_data; logic out_dz, out_fpx;
  int checks = 0, failures = 0;

  vima_fu_array #(.LANES32(L)) dut (.*, .etype(et));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [BW-1:0] A [NB], B [NB], R [NB];
  logic          got [NB];
  logic          dz_seen;
  int            t_first_in, t_last_out, cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [63:0] ref64(vop_e o, etype_e t, logic [63:0] x, logic [63:0] y);
    real rx, ry, rr;
    case (t)
      T_I64, T_U64: case (o)
        OP_ADD: return x + y;
        OP_MUL: return x * y;
        OP_DIV: return (y == 0) ? 0 : x / y;
        default: return 0;
      endcase
      T_U32: return {ref64(o, T_U64, {32'b0, x[63:32]}, {32'b0, y[63:32]})[31:0],
                     ref64(o, T_U64, {32'b0, x[31:0]},  {32'b0, y[31:0]})[31:0]};
      T_F64: begin
        rx = $bitstoreal(x); ry = $bitstoreal(y);
        case (o)
          OP_ADD: rr = rx + ry;
          OP_MUL: rr = rx * ry;
          OP_DIV: rr = rx / ry;
          default: rr = 0.0;
        endcase
        return $realtobits(rr);
      end
      default: return 0;
    endcase
  endfunction

  task automatic run(vop_e o, etype_e t, logic us, logic [63:0] sc, int exp_lat, logic zero_b = 0);
    int n_out;
    op = o; et = t; use_scalar = us; scalar = sc;
    for (int i = 0; i < NB; i++) begin
      for (int w = 0; w < L / 2; w++) begin
        if (t == T_F64) begin
          A[i][64*w +: 64] = {1'b0, 11'(1010 + $urandom % 20), 20'($urandom), 32'($urandom)};
          B[i][64*w +: 64] = {1'($urandom), 11'(1010 + $urandom % 20), 20'($urandom), 32'($urandom)};
        end else begin
          A[i][64*w +: 64] = {$urandom, $urandom};
          B[i][64*w +: 64] = {$urandom | 1, $urandom | 1};
          if (zero_b && i == 3 && w == 2) B[i][64*w +: 64] = '0;
        end
      end
      got[i] = 0;
    end
    dz_seen = 0;
    n_out = 0;
    fork
      begin
        for (int i = 0; i < NB; i++) begin
          @(negedge clk);
          in_valid = 1; in_beat = 7'(i); in_a = A[i]; in_b = B[i];
          if (i == 0) t_first_in = cyc;
        end
        @(negedge clk) in_valid = 0;
      end
      begin
        while (n_out < NB) begin
          @(posedge clk);
          #1;
          if (out_valid) begin
            logic [BW-1:0] e;
            n_out++;
            t_last_out = cyc;
            dz_seen |= out_dz;
            for (int w = 0; w < L / 2; w++) begin
              logic [63:0] bb;
              bb = (o == OP_SET) ? (is_64(t) ? sc : {sc[31:0], sc[31:0]}) :
                   us ? (is_64(t) ? sc : {sc[31:0], sc[31:0]}) : B[out_beat][64*w +: 64];
              e[64*w +: 64] = (o == OP_SET) ? bb : ref64(o, t, A[out_beat][64*w +: 64], bb);
            end
            checks++;
            if (out_data !== e || got[out_beat]) begin
              failures++;
              $display("FAIL %s %s beat %0d: got %h exp %h", o.name(), t.name(), out_beat, out_data, e);
            end
            got[out_beat] = 1;
          end
        end
      end
    join
    checks++;
    // cycles from the first beat entering to the last result leaving, inclusive
    if (t_last_out - t_first_in != exp_lat) begin
      failures++;
      $display("FAIL latency %s %s: %0d cycles, expected %0d", o.name(), t.name(), t_last_out - t_first_in, exp_lat);
    end
    checks++;
    if (dz_seen !== zero_b) begin
      failures++;
      $display("FAIL dz flag %b expected %b", dz_seen, zero_b);
    end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; in_beat = 0; in_a = 0; in_b = 0;
    op = OP_ADD; et = T_I64; use_scalar = 0; scalar = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(OP_ADD, T_U64, 0, 0, LAT_IALU);
    run(OP_MUL, T_I64, 0, 0, LAT_IMUL);
    run(OP_DIV, T_U32, 0, 0, LAT_IDIV);
    run(OP_ADD, T_F64, 0, 0, LAT_FALU);   // leaves stale beats deeper in the line
    run(OP_MUL, T_F64, 0, 0, LAT_FMUL);
    run(OP_DIV, T_F64, 0, 0, LAT_FDIV);
    run(OP_ADD, T_U32, 1, 64'h0000_0000_0000_0005, LAT_IALU);
    run(OP_SET, T_U64, 0, 64'hdead_beef_0123_4567, LAT_IALU);
    run(OP_DIV, T_U64, 0, 0, LAT_IDIV, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
