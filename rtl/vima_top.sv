// vima_top: the VIMA block on the logic layer of a 3D-stacked memory.
//
// VIMA (Vector In Memory Architecture) executes vector instructions whose operands are
// whole 8 KB vectors next to the DRAM vaults instead of in the host processor. A small
// fully associative cache of eight vector lines lets operands be reused without going
// back to the vaults. The host sends one instruction at a time, waits for its status,
// and only then sends the next, which keeps exceptions precise.
//
// Inside: the instruction sequencer (vima_sequencer) runs each instruction; the operand
// cache (vima_cache) holds the vectors; the sub-request engine (vima_subreq) turns line
// fills and write-backs into 64 B requests spread over the 32 vaults; the functional
// units (vima_fu_array, 256 x 32 bits) process one 1 KB beat per cycle from the cache's
// two read ports; the fill buffer (vima_fill_buffer) collects the result, which is
// copied into the cache as the status goes out.
//
// Ports: the host side carries instructions (valid/ready), the one-cycle status strobe,
// and the coherence traffic (host loads answered from a VIMA line, host stores that
// write back and invalidate a VIMA line). The memory side is the request/response
// interface towards the crossbar and vault controllers, which belong to the memory cube
// and are not part of this block. The block partition follows the architecture; port
// protocols are this design's choice (see the individual modules).
module vima_top #(
  parameter int unsigned VEC_BYTES = vima_pkg::VEC_BYTES,
  parameter int unsigned LANES32   = vima_pkg::LANES32,
  parameter int unsigned WAYS      = vima_pkg::WAYS,
  parameter int unsigned SUB_BYTES = vima_pkg::SUB_BYTES,
  parameter int unsigned ROW_BYTES = vima_pkg::ROW_BYTES,
  parameter int unsigned ADDR_W    = vima_pkg::ADDR_W,
  parameter int unsigned CW        = $clog2(VEC_BYTES / SUB_BYTES)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host
  input  logic                    instr_valid,
  output logic                    instr_ready,
  input  vima_pkg::vinstr_t       instr,
  output logic                    status_valid,
  output vima_pkg::vstatus_t      status,
  input  logic                    pld_valid,
  input  logic [ADDR_W-1:0]       pld_addr,
  output logic                    pld_resp_valid,
  output logic                    pld_hit,
  output logic [SUB_BYTES*8-1:0]  pld_data,
  input  logic                    pst_valid,
  input  logic [ADDR_W-1:0]       pst_addr,
  output logic                    pst_ack,
  output logic                    pst_err,
  // vaults (through the crossbar)
  output logic                    mem_req_valid,
  input  logic                    mem_req_ready,
  output logic                    mem_req_write,
  output logic [ADDR_W-1:0]       mem_req_addr,
  output logic [SUB_BYTES*8-1:0]  mem_req_wdata,
  output logic [CW:0]             mem_req_tag,
  input  logic                    mem_resp_valid,
  input  logic [CW:0]             mem_resp_tag,
  input  logic [SUB_BYTES*8-1:0]  mem_resp_rdata,
  input  logic                    mem_resp_err
);
  import vima_pkg::*;

  localparam int unsigned BEAT_W = LANES32 * 32;
  localparam int unsigned BEATS  = VEC_BYTES * 8 / BEAT_W;
  localparam int unsigned SUB_W  = SUB_BYTES * 8;
  localparam int unsigned TAG_W  = ADDR_W - $clog2(VEC_BYTES);
  localparam int unsigned WW     = $clog2(WAYS);
  localparam int unsigned BB     = $clog2(BEATS);

  vinstr_t          cur;
  // cache control
  logic [TAG_W-1:0] lk_tag [3];
  logic             lk_hit [3];
  logic [WW-1:0]    lk_way [3];
  logic [WAYS-1:0]  protect, line_valid, line_dirty;
  logic [TAG_W-1:0] line_tag [WAYS];
  logic [WW-1:0]    victim_way;
  logic             victim_valid, victim_dirty, victim_found;
  logic [TAG_W-1:0] victim_tag;
  logic             install_en, mark_en, mark_dirty, inval_en, touch_en;
  logic [WW-1:0]    install_way, mark_way, inval_way, touch_way;
  logic [TAG_W-1:0] install_tag;
  logic             rd_en, wr_en;
  logic [WW-1:0]    rda_way, rdb_way, wr_way;
  logic [BB-1:0]    rd_beat, wr_beat;
  logic [BEAT_W-1:0] rda_data, rdb_data, fb_rd_data;
  // 64 B port
  logic             s_ck_rd_en, q_ck_rd_en, ck_wr_en;
  logic [WW-1:0]    s_ck_rd_way, q_ck_rd_way, ck_wr_way;
  logic [CW-1:0]    s_ck_rd_idx, q_ck_rd_idx, ck_wr_idx;
  logic [SUB_W-1:0] ck_rd_data, ck_wr_data;
  // sub-request jobs
  logic             sr_start, sr_write, sr_two, sr_busy, sr_done, sr_err;
  logic [WW-1:0]    sr_way  [2];
  logic [ADDR_W-1:0] sr_base [2];
  // units and fill buffer
  logic             fu_valid, fu_out_valid, fu_out_dz, fu_out_fpx;
  logic [BB-1:0]    fu_beat, fu_out_beat;
  logic [BEAT_W-1:0] fu_out_data;
  logic             fb_clear, fb_rd_en, fb_full;
  logic [BB-1:0]    fb_rd_beat;

  vima_sequencer #(
    .VEC_BYTES(VEC_BYTES), .WAYS(WAYS), .BEATS(BEATS), .SUB_BYTES(SUB_BYTES), .ADDR_W(ADDR_W)
  ) u_seq (
    .clk, .rst_n,
    .instr_valid, .instr_ready, .instr, .status_valid, .status,
    .pld_valid, .pld_addr, .pld_resp_valid, .pld_hit,
    .pst_valid, .pst_addr, .pst_ack, .pst_err,
    .cur,
    .c_lk_tag(lk_tag), .c_lk_hit(lk_hit), .c_lk_way(lk_way), .c_protect(protect),
    .c_victim_way(victim_way), .c_victim_dirty(victim_dirty), .c_victim_tag(victim_tag),
    .c_line_dirty(line_dirty),
    .c_install_en(install_en), .c_install_way(install_way), .c_install_tag(install_tag),
    .c_mark_en(mark_en), .c_mark_way(mark_way), .c_mark_dirty(mark_dirty),
    .c_inval_en(inval_en), .c_inval_way(inval_way),
    .c_touch_en(touch_en), .c_touch_way(touch_way),
    .c_rd_en(rd_en), .c_rda_way(rda_way), .c_rdb_way(rdb_way), .c_rd_beat(rd_beat),
    .c_wr_en(wr_en), .c_wr_way(wr_way), .c_wr_beat(wr_beat),
    .c_ck_rd_en(q_ck_rd_en), .c_ck_rd_way(q_ck_rd_way), .c_ck_rd_idx(q_ck_rd_idx),
    .sr_start, .sr_write, .sr_two, .sr_way, .sr_base, .sr_done, .sr_err,
    .fu_valid, .fu_beat, .fu_out_valid, .fu_out_dz, .fu_out_fpx,
    .fb_clear, .fb_rd_en, .fb_rd_beat, .fb_full
  );

  vima_cache #(
    .WAYS(WAYS), .VEC_BYTES(VEC_BYTES), .BEAT_W(BEAT_W), .ADDR_W(ADDR_W), .SUB_W(SUB_W)
  ) u_cache (
    .clk, .rst_n,
    .lk_tag, .lk_hit, .lk_way,
    .protect, .victim_way, .victim_valid, .victim_dirty, .victim_tag, .victim_found,
    .install_en, .install_way, .install_tag,
    .mark_en, .mark_way, .mark_dirty,
    .inval_en, .inval_way,
    .clean_en(1'b0), .clean_way('0),
    .touch_en, .touch_way,
    .line_valid, .line_dirty, .line_tag,
    .rda_en(rd_en), .rda_way, .rda_beat(rd_beat), .rda_data,
    .rdb_en(rd_en), .rdb_way, .rdb_beat(rd_beat), .rdb_data,
    .wr_en, .wr_way, .wr_beat, .wr_data(fb_rd_data),
    .ck_rd_en(s_ck_rd_en | q_ck_rd_en),
    .ck_rd_way(q_ck_rd_en ? q_ck_rd_way : s_ck_rd_way),
    .ck_rd_idx(q_ck_rd_en ? q_ck_rd_idx : s_ck_rd_idx),
    .ck_rd_data,
    .ck_wr_en, .ck_wr_way, .ck_wr_idx, .ck_wr_data
  );

  assign pld_data = ck_rd_data;

  vima_subreq #(
    .VEC_BYTES(VEC_BYTES), .SUB_BYTES(SUB_BYTES), .ROW_BYTES(ROW_BYTES), .ADDR_W(ADDR_W), .WAYS(WAYS)
  ) u_subreq (
    .clk, .rst_n,
    .start(sr_start), .write(sr_write), .two(sr_two), .way(sr_way), .base(sr_base),
    .busy(sr_busy), .done(sr_done), .err(sr_err),
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_write(mem_req_write),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .req_tag(mem_req_tag),
    .resp_valid(mem_resp_valid), .resp_tag(mem_resp_tag), .resp_rdata(mem_resp_rdata),
    .resp_err(mem_resp_err),
    .ck_rd_en(s_ck_rd_en), .ck_rd_way(s_ck_rd_way), .ck_rd_idx(s_ck_rd_idx), .ck_rd_data,
    .ck_wr_en, .ck_wr_way, .ck_wr_idx, .ck_wr_data
  );

  vima_fu_array #(.LANES32(LANES32), .BEATS(BEATS)) u_fu (
    .clk, .rst_n,
    .op(cur.op), .etype(cur.etype), .use_scalar(cur.use_scalar), .scalar(cur.scalar),
    .in_valid(fu_valid), .in_beat(fu_beat), .in_a(rda_data), .in_b(rdb_data),
    .out_valid(fu_out_valid), .out_beat(fu_out_beat), .out_data(fu_out_data),
    .out_dz(fu_out_dz), .out_fpx(fu_out_fpx)
  );

  vima_fill_buffer #(.BEAT_W(BEAT_W), .BEATS(BEATS)) u_fb (
    .clk, .rst_n, .clear(fb_clear),
    .wr_en(fu_out_valid), .wr_beat(fu_out_beat), .wr_data(fu_out_data),
    .rd_en(fb_rd_en), .rd_beat(fb_rd_beat), .rd_data(fb_rd_data), .full(fb_full)
  );

  // The two users of the 64 B read port never overlap.
  a_ck_port_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    !(s_ck_rd_en && q_ck_rd_en))
    else $error("vima_top: 64 B cache port used twice");

endmodule
