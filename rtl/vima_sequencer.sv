// vima_sequencer: the VIMA instruction sequencer.
//
// It accepts one VIMA instruction at a time from the host processor and runs it to the
// end before taking the next, which is what lets the host keep exceptions precise:
//
//   IDLE   -> TAG     one cycle of tag check for src1, src2 and dst;
//   ALLOC             for each missing source, and for the destination if it is not
//                     already in the cache, pick the LRU line (never a line of this
//                     instruction), give it the new tag (it stays invalid until filled);
//   WB_SRC, FETCH     dirty victims of the sources are written back, then the missing
//                     sources are fetched - two missing operands as one interleaved job;
//   WB_DST            a dirty victim of the destination is written back;
//   EXEC              8 beats read from the two cache read ports (one cycle latency) are
//                     streamed through the units; results fill the fill buffer;
//   STATUS            completion or exception is reported to the host (one cycle);
//   COMMIT            on success the fill buffer is copied into the destination line in
//                     8 beats, the line becomes valid and dirty; one more cycle (DONE)
//                     lets the line's state settle, then the instruction port opens.
// Exceptions (this design's set): misaligned vector address or undefined operation
// (found before any state changes), vault error during a write-back or fetch, integer
// division by zero and invalid floating-point operation (found after EXEC). On any
// exception the destination is not written.
//
// Between instructions it also serves the host's coherence traffic: a host load whose
// 64 B block sits in a VIMA line is answered from the cache (pld_hit) one cycle later;
// a host store to a block held by VIMA writes the line back if dirty and invalidates it
// before pst_ack. The host holds pld_valid / pst_valid until pld_resp_valid / pst_ack,
// since they are only taken between instructions. Sub-requests are issued by vima_subreq; data moves on paths wired in
// vima_top and never passes through this module.
module vima_sequencer #(
  parameter int unsigned VEC_BYTES = vima_pkg::VEC_BYTES,
  parameter int unsigned WAYS      = vima_pkg::WAYS,
  parameter int unsigned BEATS     = vima_pkg::VEC_BYTES / (vima_pkg::LANES32 * 4),
  parameter int unsigned SUB_BYTES = vima_pkg::SUB_BYTES,
  parameter int unsigned ADDR_W    = vima_pkg::ADDR_W,
  parameter int unsigned SUB_W     = SUB_BYTES * 8,
  parameter int unsigned CHUNKS    = VEC_BYTES / SUB_BYTES,
  parameter int unsigned TAG_W     = ADDR_W - $clog2(VEC_BYTES),
  parameter int unsigned WW        = $clog2(WAYS),
  parameter int unsigned BB        = $clog2(BEATS),
  parameter int unsigned CW        = $clog2(CHUNKS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host: instructions and status
  input  logic                  instr_valid,
  output logic                  instr_ready,
  input  vima_pkg::vinstr_t     instr,
  output logic                  status_valid,
  output vima_pkg::vstatus_t    status,
  // host: coherence
  input  logic                  pld_valid,
  input  logic [ADDR_W-1:0]     pld_addr,
  output logic                  pld_resp_valid,
  output logic                  pld_hit,
  input  logic                  pst_valid,
  input  logic [ADDR_W-1:0]     pst_addr,
  output logic                  pst_ack,
  output logic                  pst_err,
  // current instruction, for the units
  output vima_pkg::vinstr_t     cur,
  // cache control
  output logic [TAG_W-1:0]      c_lk_tag   [3],
  input  logic                  c_lk_hit   [3],
  input  logic [WW-1:0]         c_lk_way   [3],
  output logic [WAYS-1:0]       c_protect,
  input  logic [WW-1:0]         c_victim_way,
  input  logic                  c_victim_dirty,
  input  logic [TAG_W-1:0]      c_victim_tag,
  input  logic [WAYS-1:0]       c_line_dirty,
  output logic                  c_install_en,
  output logic [WW-1:0]         c_install_way,
  output logic [TAG_W-1:0]      c_install_tag,
  output logic                  c_mark_en,
  output logic [WW-1:0]         c_mark_way,
  output logic                  c_mark_dirty,
  output logic                  c_inval_en,
  output logic [WW-1:0]         c_inval_way,
  output logic                  c_touch_en,
  output logic [WW-1:0]         c_touch_way,
  output logic                  c_rd_en,
  output logic [WW-1:0]         c_rda_way,
  output logic [WW-1:0]         c_rdb_way,
  output logic [BB-1:0]         c_rd_beat,
  output logic                  c_wr_en,
  output logic [WW-1:0]         c_wr_way,
  output logic [BB-1:0]         c_wr_beat,
  output logic                  c_ck_rd_en,
  output logic [WW-1:0]         c_ck_rd_way,
  output logic [CW-1:0]         c_ck_rd_idx,
  // sub-request engine
  output logic                  sr_start,
  output logic                  sr_write,
  output logic                  sr_two,
  output logic [WW-1:0]         sr_way  [2],
  output logic [ADDR_W-1:0]     sr_base [2],
  input  logic                  sr_done,
  input  logic                  sr_err,
  // units
  output logic                  fu_valid,
  output logic [BB-1:0]         fu_beat,
  input  logic                  fu_out_valid,
  input  logic                  fu_out_dz,
  input  logic                  fu_out_fpx,
  // fill buffer
  output logic                  fb_clear,
  output logic                  fb_rd_en,
  output logic [BB-1:0]         fb_rd_beat,
  input  logic                  fb_full
);
  import vima_pkg::*;

  localparam int unsigned OFF_W = $clog2(VEC_BYTES);

  typedef enum logic [3:0] {
    S_IDLE, S_TAG, S_ALLOC, S_WB_SRC, S_FETCH, S_WB_DST, S_EXEC, S_STATUS, S_COMMIT,
    S_PLD, S_PST_WB, S_MARK2, S_DONE
  } state_e;

  state_e           st;
  vinstr_t          ins;
  logic [1:0]       nsrc;            // vector sources used by the instruction
  logic             need_dst_alloc;
  logic [WW-1:0]    way_s1, way_s2, way_d;
  logic             miss_s1, miss_s2, s2_is_s1;
  logic             wb_s1, wb_s2, wb_d;            // victims to write back
  logic [TAG_W-1:0] wbtag_s1, wbtag_s2, wbtag_d;
  logic [1:0]       alloc_i;
  logic             job_run;
  logic [BB:0]      n_iss, n_com;
  logic             x_dz, x_fpx;
  exc_e             cause;
  logic [WW-1:0]    snoop_way;
  logic [TAG_W-1:0] snoop_tag;

  assign cur = ins;

  function automatic logic [TAG_W-1:0] tag_of(logic [ADDR_W-1:0] a);
    return a[ADDR_W-1:OFF_W];
  endfunction
  function automatic logic [ADDR_W-1:0] addr_of(logic [TAG_W-1:0] t);
    return {t, {OFF_W{1'b0}}};
  endfunction
  function automatic logic misaligned(vinstr_t i);
    int unsigned n;
    n = n_vec_src(i.op, i.use_scalar);
    return (i.dst[OFF_W-1:0] != '0) || (n >= 1 && i.src1[OFF_W-1:0] != '0) ||
           (n >= 2 && i.src2[OFF_W-1:0] != '0);
  endfunction

  // ---------------------------------------------------------------- combinational
  always_comb begin
    c_lk_tag[0] = tag_of(ins.src1);
    c_lk_tag[1] = tag_of(ins.src2);
    c_lk_tag[2] = tag_of(ins.dst);
    if (st == S_IDLE) c_lk_tag[0] = pst_valid ? tag_of(pst_addr) : tag_of(pld_addr);
  end

  assign instr_ready = (st == S_IDLE) && !pld_valid && !pst_valid;

  // cache read for the processor load
  assign c_ck_rd_en  = (st == S_IDLE) && pld_valid && !pst_valid && c_lk_hit[0];
  assign c_ck_rd_way = c_lk_way[0];
  assign c_ck_rd_idx = pld_addr[OFF_W-1:$clog2(SUB_BYTES)];

  // operand reads: beat n_iss while issuing
  assign c_rd_en   = (st == S_EXEC) && (n_iss < (BB+1)'(BEATS)) && (nsrc != 0);
  assign c_rda_way = way_s1;
  assign c_rdb_way = way_s2;
  assign c_rd_beat = n_iss[BB-1:0];

  // commit: fill buffer beat n_com is read, written one cycle later
  assign fb_rd_en   = (st == S_COMMIT) && (n_com < (BB+1)'(BEATS));
  assign fb_rd_beat = n_com[BB-1:0];

  // tag-check results
  logic          t_miss1, t_miss2, t_dalloc, touch2;
  logic [WW-1:0] t_dway;
  always_comb begin
    t_miss1  = (nsrc >= 1) && !c_lk_hit[0];
    t_miss2  = (nsrc == 2) && !c_lk_hit[1] && (tag_of(ins.src2) != tag_of(ins.src1));
    t_dalloc = !c_lk_hit[2] &&
               !((nsrc >= 1) && tag_of(ins.dst) == tag_of(ins.src1)) &&
               !((nsrc == 2) && tag_of(ins.dst) == tag_of(ins.src2));
    t_dway   = c_lk_way[2];
    if ((nsrc >= 1) && tag_of(ins.dst) == tag_of(ins.src1)) t_dway = c_lk_way[0];
    else if ((nsrc == 2) && tag_of(ins.dst) == tag_of(ins.src2)) t_dway = c_lk_way[1];
  end

  // ---------------------------------------------------------------- sequential
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      ins <= '0;
      nsrc <= '0;
      need_dst_alloc <= 1'b0;
      way_s1 <= '0; way_s2 <= '0; way_d <= '0;
      miss_s1 <= 1'b0; miss_s2 <= 1'b0; s2_is_s1 <= 1'b0;
      wb_s1 <= 1'b0; wb_s2 <= 1'b0; wb_d <= 1'b0;
      wbtag_s1 <= '0; wbtag_s2 <= '0; wbtag_d <= '0;
      alloc_i <= '0;
      job_run <= 1'b0;
      n_iss <= '0; n_com <= '0;
      x_dz <= 1'b0; x_fpx <= 1'b0;
      cause <= EXC_NONE;
      c_protect <= '0;
      snoop_way <= '0;
      snoop_tag <= '0;
      touch2 <= 1'b0;
      status_valid <= 1'b0; status <= '0;
      pld_resp_valid <= 1'b0; pld_hit <= 1'b0;
      pst_ack <= 1'b0; pst_err <= 1'b0;
      c_install_en <= 1'b0; c_install_way <= '0; c_install_tag <= '0;
      c_mark_en <= 1'b0; c_mark_way <= '0; c_mark_dirty <= 1'b0;
      c_inval_en <= 1'b0; c_inval_way <= '0;
      c_touch_en <= 1'b0; c_touch_way <= '0;
      c_wr_en <= 1'b0; c_wr_way <= '0; c_wr_beat <= '0;
      sr_start <= 1'b0; sr_write <= 1'b0; sr_two <= 1'b0;
      sr_way <= '{default: '0}; sr_base <= '{default: '0};
      fu_valid <= 1'b0; fu_beat <= '0;
      fb_clear <= 1'b0;
    end else begin
      // one-cycle strobes
      status_valid   <= 1'b0;
      pld_resp_valid <= 1'b0;
      pst_ack        <= 1'b0;
      c_install_en   <= 1'b0;
      c_mark_en      <= 1'b0;
      c_inval_en     <= 1'b0;
      c_touch_en     <= 1'b0;
      c_wr_en        <= 1'b0;
      sr_start       <= 1'b0;
      fu_valid       <= 1'b0;
      fb_clear       <= 1'b0;

      case (st)
        // ------------------------------------------------------------ idle
        S_IDLE: begin
          if (pst_valid) begin
            if (c_lk_hit[0]) begin
              snoop_way <= c_lk_way[0];
              snoop_tag <= c_lk_tag[0];
              st        <= S_PST_WB;
              job_run   <= 1'b0;
            end else begin
              pst_ack <= 1'b1;
              pst_err <= 1'b0;
            end
          end else if (pld_valid) begin
            pld_hit <= c_lk_hit[0];
            st      <= S_PLD;
          end else if (instr_valid) begin
            ins      <= instr;
            nsrc     <= 2'(n_vec_src(instr.op, instr.use_scalar));
            x_dz     <= 1'b0;
            x_fpx    <= 1'b0;
            fb_clear <= 1'b1;
            if (!valid_op(instr.op, instr.etype)) begin
              cause <= EXC_OPCODE;
              st    <= S_STATUS;
            end else if (misaligned(instr)) begin
              cause <= EXC_ALIGN;
              st    <= S_STATUS;
            end else begin
              cause <= EXC_NONE;
              st    <= S_TAG;
            end
          end
        end

        S_PLD: begin
          pld_resp_valid <= 1'b1;
          st             <= S_IDLE;
        end

        S_PST_WB: begin
          // write back the line if it is dirty, then invalidate it
          if (!job_run) begin
            if (c_line_dirty[snoop_way]) begin
              sr_start   <= 1'b1;
              sr_write   <= 1'b1;
              sr_two     <= 1'b0;
              sr_way[0]  <= snoop_way;
              sr_base[0] <= addr_of(snoop_tag);
              job_run    <= 1'b1;
            end else begin
              c_inval_en  <= 1'b1;
              c_inval_way <= snoop_way;
              pst_ack     <= 1'b1;
              pst_err     <= 1'b0;
              st          <= S_IDLE;
            end
          end else if (sr_done) begin
            job_run     <= 1'b0;
            c_inval_en  <= 1'b1;
            c_inval_way <= snoop_way;
            pst_ack     <= 1'b1;
            pst_err     <= sr_err;
            st          <= S_IDLE;
          end
        end

        // ------------------------------------------------------------ tag check
        S_TAG: begin
          miss_s1  <= t_miss1;
          miss_s2  <= t_miss2;
          s2_is_s1 <= (nsrc == 2) && (tag_of(ins.src2) == tag_of(ins.src1));
          way_s1   <= c_lk_way[0];
          way_s2   <= c_lk_way[1];
          need_dst_alloc <= t_dalloc;
          c_protect <= '0;
          for (int p = 0; p < 3; p++)
            if (c_lk_hit[p]) c_protect[c_lk_way[p]] <= 1'b1;
          if (nsrc >= 1 && c_lk_hit[0]) begin
            c_touch_en  <= 1'b1;
            c_touch_way <= c_lk_way[0];
          end
          wb_s1 <= 1'b0; wb_s2 <= 1'b0; wb_d <= 1'b0;
          alloc_i <= '0;
          if (!t_miss1 && !t_miss2 && !t_dalloc) begin
            // everything is in the cache: start at once
            way_d   <= t_dway;
            touch2  <= (nsrc == 2);
            n_iss   <= '0;
            st      <= S_EXEC;
          end else begin
            way_d <= c_lk_way[2];
            st    <= S_ALLOC;
          end
        end

        // ------------------------------------------------------------ allocation
        S_ALLOC: begin
          alloc_i <= alloc_i + 1'b1;
          case (alloc_i)
            2'd0: if (miss_s1) begin
              way_s1 <= c_victim_way;
              wb_s1  <= c_victim_dirty;
              wbtag_s1 <= c_victim_tag;
              c_install_en  <= 1'b1;
              c_install_way <= c_victim_way;
              c_install_tag <= tag_of(ins.src1);
              c_protect[c_victim_way] <= 1'b1;
            end
            2'd1: begin
              if (miss_s2) begin
                way_s2 <= c_victim_way;
                wb_s2  <= c_victim_dirty;
                wbtag_s2 <= c_victim_tag;
                c_install_en  <= 1'b1;
                c_install_way <= c_victim_way;
                c_install_tag <= tag_of(ins.src2);
                c_protect[c_victim_way] <= 1'b1;
              end else if (s2_is_s1) begin
                way_s2 <= way_s1;
              end else if (nsrc == 2) begin
                c_touch_en  <= 1'b1;
                c_touch_way <= way_s2;
              end
            end
            default: begin
              if (need_dst_alloc) begin
                way_d <= c_victim_way;
                wb_d  <= c_victim_dirty;
                wbtag_d <= c_victim_tag;
                c_install_en  <= 1'b1;
                c_install_way <= c_victim_way;
                c_install_tag <= tag_of(ins.dst);
                c_protect[c_victim_way] <= 1'b1;
              end else if ((nsrc >= 1) && tag_of(ins.dst) == tag_of(ins.src1)) begin
                way_d <= way_s1;
              end else if ((nsrc == 2) && tag_of(ins.dst) == tag_of(ins.src2)) begin
                way_d <= way_s2;
              end
              job_run <= 1'b0;
              st <= S_WB_SRC;
            end
          endcase
        end

        // ------------------------------------------------------------ memory jobs
        S_WB_SRC: begin
          if (!job_run) begin
            if (wb_s1 || wb_s2) begin
              sr_start   <= 1'b1;
              sr_write   <= 1'b1;
              sr_two     <= wb_s1 && wb_s2;
              sr_way[0]  <= wb_s1 ? way_s1 : way_s2;
              sr_base[0] <= addr_of(wb_s1 ? wbtag_s1 : wbtag_s2);
              sr_way[1]  <= way_s2;
              sr_base[1] <= addr_of(wbtag_s2);
              job_run    <= 1'b1;
            end else st <= S_FETCH;
          end else if (sr_done) begin
            job_run <= 1'b0;
            if (sr_err) begin cause <= EXC_MEM; st <= S_STATUS; end
            else st <= S_FETCH;
          end
        end

        S_FETCH: begin
          if (!job_run) begin
            if (miss_s1 || miss_s2) begin
              sr_start   <= 1'b1;
              sr_write   <= 1'b0;
              sr_two     <= miss_s1 && miss_s2;
              sr_way[0]  <= miss_s1 ? way_s1 : way_s2;
              sr_base[0] <= miss_s1 ? ins.src1 : ins.src2;
              sr_way[1]  <= way_s2;
              sr_base[1] <= ins.src2;
              job_run    <= 1'b1;
            end else st <= S_WB_DST;
          end else if (sr_done) begin
            job_run <= 1'b0;
            if (sr_err) begin
              cause <= EXC_MEM;
              st    <= S_STATUS;
            end else begin
              // fetched lines become valid and clean
              c_mark_en    <= 1'b1;
              c_mark_way   <= miss_s1 ? way_s1 : way_s2;
              c_mark_dirty <= 1'b0;
              st <= (miss_s1 && miss_s2) ? S_MARK2 : S_WB_DST;
            end
          end
        end

        S_MARK2: begin
          c_mark_en    <= 1'b1;
          c_mark_way   <= way_s2;
          c_mark_dirty <= 1'b0;
          st           <= S_WB_DST;
        end

        S_WB_DST: begin
          if (!job_run) begin
            if (wb_d) begin
              sr_start   <= 1'b1;
              sr_write   <= 1'b1;
              sr_two     <= 1'b0;
              sr_way[0]  <= way_d;
              sr_base[0] <= addr_of(wbtag_d);
              job_run    <= 1'b1;
            end else begin
              n_iss   <= '0;
                      st      <= S_EXEC;
            end
          end else if (sr_done) begin
            job_run <= 1'b0;
            wb_d    <= 1'b0;
            if (sr_err) begin cause <= EXC_MEM; st <= S_STATUS; end
          end
        end

        // ------------------------------------------------------------ execute
        S_EXEC: begin
          if (touch2) begin
            touch2      <= 1'b0;
            c_touch_en  <= 1'b1;
            c_touch_way <= way_s2;
          end
          if (n_iss < (BB+1)'(BEATS)) n_iss <= n_iss + 1'b1;
          // operands read this cycle enter the units next cycle
          fu_valid <= (n_iss < (BB+1)'(BEATS));
          fu_beat  <= n_iss[BB-1:0];
          if (fu_out_valid) begin
            x_dz  <= x_dz  | fu_out_dz;
            x_fpx <= x_fpx | fu_out_fpx;
          end
          if (fb_full && !fu_out_valid) begin
            if (x_dz) cause <= EXC_DIVZERO;
            else if (x_fpx) cause <= EXC_FPINV;
            st <= S_STATUS;
          end
        end

        // ------------------------------------------------------------ report
        S_STATUS: begin
          status_valid <= 1'b1;
          status       <= '{ok: (cause == EXC_NONE), cause: cause};
          n_com        <= '0;
          if (cause == EXC_NONE) st <= S_COMMIT;
          else st <= S_IDLE;
        end

        S_COMMIT: begin
          if (n_com < (BB+1)'(BEATS)) n_com <= n_com + 1'b1;
          c_wr_en   <= (n_com < (BB+1)'(BEATS));
          c_wr_way  <= way_d;
          c_wr_beat <= n_com[BB-1:0];
          if (n_com == (BB+1)'(BEATS)) begin
            c_mark_en    <= 1'b1;
            c_mark_way   <= way_d;
            c_mark_dirty <= 1'b1;
            c_touch_en   <= 1'b1;
            c_touch_way  <= way_d;
            st           <= S_DONE;
          end
        end

        // the line's metadata settles before the next lookup
        S_DONE: st <= S_IDLE;

        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
