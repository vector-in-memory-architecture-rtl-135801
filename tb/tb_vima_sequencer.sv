// tb_vima_sequencer: self-checking test of the instruction sequencer, run with the real
// cache, sub-request engine, unit array and fill buffer at a reduced size (1 KB vectors,
// 32 units so a vector is still 8 beats, 8 cache lines) and the behavioural memory model.
//
// Besides the status of every instruction it checks the sequencer's own rules, cycle by
// cycle: the instruction port stays closed from acceptance until the commit is over; an
// instruction whose operands are all cached reaches its status 6 + L cycles after the
// handshake (L = the 8-beat unit latency); memory jobs go write-back of source victims,
// then fetch, then write-back of the destination victim; two missing sources are fetched
// by one interleaved job; the status goes out before the first result beat is written;
// exactly 8 beats are committed, all to one line; after an exception nothing is
// committed; and host loads and stores are answered between instructions.
module tb_vima_sequencer;
  import vima_pkg::*;
  import vima_tb_pkg::*;

  localparam int unsigned VEC_BYTES = 1024, LANES32 = 32, WAYS = 8, SUB_BYTES = 64,
                          ROW_BYTES = 256, ADDR_W = 64, CW = 4;

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready;
  vinstr_t instr;
  logic status_valid;
  vstatus_t status;
  logic pld_valid = 0, pld_resp_valid, pld_hit;
  logic [63:0] pld_addr = 0;
  logic [511:0] pld_data;
  logic pst_valid = 0, pst_ack, pst_err;
  logic [63:0] pst_addr = 0;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid, mem_resp_err;
  logic [63:0] mem_req_addr;
  logic [511:0] mem_req_wdata, mem_resp_rdata;
  logic [CW:0] mem_req_tag, mem_resp_tag;
  logic err_en = 0;
  logic [63:0] err_addr = 0;

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


  vima_vault_model #(.SUB_W(512), .TW(CW + 1)) mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_write(mem_req_write), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .req_tag(mem_req_tag), .resp_valid(mem_resp_valid), .resp_tag(mem_resp_tag),
    .resp_rdata(mem_resp_rdata), .resp_err(mem_resp_err), .err_en, .err_addr);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s", msg); end
  endtask

  // ---------------------------------------------------------------- per-instruction log
  logic in_flight = 0;
  logic status_seen;
  int   n_wr, n_ready_violation;
  logic [WW-1:0] wr_way_seen;
  logic wr_way_mixed, wr_before_status;
  string jobs;

  always @(posedge clk) begin
    if (in_flight) begin
      if (instr_ready) n_ready_violation++;
      if (status_valid) status_seen = 1;
      if (wr_en) begin
        if (!status_seen) wr_before_status = 1;
        if (n_wr > 0 && wr_way != wr_way_seen) wr_way_mixed = 1;
        wr_way_seen = wr_way;
        n_wr++;
      end
      if (sr_start) jobs = {jobs, sr_write ? "W" : (sr_two ? "F2" : "F"), " "};
    end
  end

  function automatic logic [63:0] va(int i);
    return 64'h20_0000 + 64'(i) * 64'(VEC_BYTES);
  endfunction

  function automatic vinstr_t mk(vop_e op, etype_e t, int d, int s1, int s2, logic us = 0, logic [63:0] sc = 0);
    vinstr_t i;
    i.op = op; i.etype = t; i.use_scalar = us; i.scalar = sc;
    i.dst = va(d); i.src1 = va(s1); i.src2 = va(s2);
    return i;
  endfunction

  task automatic exec(vinstr_t in, exc_e cause, string what, string exp_jobs = "?", int exp_lat = -1);
    longint t0, lat;
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = in; instr_valid = 1;
    n_wr = 0; n_ready_violation = 0; wr_way_mixed = 0; wr_before_status = 0; status_seen = 0; jobs = "";
    @(posedge clk);
    t0 = cyc;
    #1 in_flight = 1;
    @(negedge clk);
    instr_valid = 0;
    while (!status_valid) @(negedge clk);
    lat = cyc - t0;
    chk(status.cause == cause && status.ok == (cause == EXC_NONE),
        $sformatf("%s: status %s expected %s", what, status.cause.name(), cause.name()));
    // wait for the port to open again
    while (!instr_ready) @(negedge clk);
    in_flight = 0;
    chk(n_ready_violation == 0, $sformatf("%s: instruction port opened early", what));
    if (cause == EXC_NONE) begin
      chk(n_wr == 8 && !wr_way_mixed, $sformatf("%s: %0d result beats committed", what, n_wr));
      chk(!wr_before_status, $sformatf("%s: result written before status", what));
    end else
      chk(n_wr == 0, $sformatf("%s: result committed after an exception", what));
    if (exp_jobs != "?") chk(jobs == exp_jobs, $sformatf("%s: memory jobs '%s' expected '%s'", what, jobs, exp_jobs));
    if (exp_lat >= 0) chk(lat == longint'(exp_lat), $sformatf("%s: latency %0d expected %0d", what, lat, exp_lat));
  endtask

  task automatic host_load(logic [63:0] a, output logic hit, output logic [511:0] d);
    @(negedge clk);
    pld_valid = 1; pld_addr = a;
    @(negedge clk);
    while (!pld_resp_valid) @(negedge clk);
    pld_valid = 0;
    hit = pld_hit; d = pld_data;
  endtask

  initial begin
    logic hit;
    logic [511:0] d;
    instr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    exec(mk(OP_SET, T_U32, 0, 0, 0, 0, 64'h5a5a_0001), EXC_NONE, "set (no fetch)", "");
    exec(mk(OP_ADD, T_U32, 1, 2, 3), EXC_NONE, "two misses", "F2 ");
    exec(mk(OP_ADD, T_U32, 1, 2, 3), EXC_NONE, "all cached add", "", 6 + LAT_IALU);
    exec(mk(OP_MUL, T_U32, 1, 2, 3), EXC_NONE, "all cached mul", "", 6 + LAT_IMUL);
    exec(mk(OP_DIV, T_U32, 1, 2, 3), EXC_NONE, "all cached div", "", 6 + LAT_IDIV);
    exec(mk(OP_DIV, T_F64, 1, 2, 3), EXC_NONE, "all cached fdiv", "", 6 + LAT_FDIV);
    exec(mk(OP_ADD, T_F32, 1, 2, 3), EXC_NONE, "all cached fadd", "", 6 + LAT_FALU);
    exec(mk(OP_MOV, T_U32, 4, 0, 0), EXC_NONE, "copy", "");
    host_load(va(4) + 64'd64, hit, d);
    chk(hit && d == {16{32'h5a5a_0001}}, "copied data read by the host");
    // lines 0,1,2,3,4 are held; 0,1,4 are dirty. Fill the cache with new lines.
    exec(mk(OP_MOV, T_U32, 5, 6, 0), EXC_NONE, "fill 1", "F ");
    exec(mk(OP_MOV, T_U32, 7, 8, 0), EXC_NONE, "fill 2", "F ");
    // the LRU line chosen for the destination is dirty: fetch, then its write-back
    exec(mk(OP_MOV, T_U32, 10, 9, 0), EXC_NONE, "evict dirty for destination", "F W ");
    exec(mk(OP_ADD, T_U32, 12, 11, 13), EXC_NONE, "evict around two misses", "?");
    exec(mk(OP_DIV, T_I32, 14, 11, 0, 1, 0), EXC_DIVZERO, "divide by zero");
    exec(mk(OP_ADD, T_U32, 14, 11, 15) , EXC_NONE, "after exception", "?");
    err_en = 1; err_addr = va(16) + 64'd128;
    exec(mk(OP_MOV, T_U32, 17, 16, 0), EXC_MEM, "vault error");
    err_en = 0;
    begin
      vinstr_t m;
      m = mk(OP_MOV, T_U32, 17, 16, 0);
      m.dst += 64'd4;
      exec(m, EXC_ALIGN, "misaligned destination", "");
    end
    // the memory must hold the first SET result once line 0 was evicted
    chk(mem.peek(va(0)) == {16{32'h5a5a_0001}}, "evicted dirty line written back");
    host_load(va(0), hit, d);
    chk(!hit, "evicted line no longer held");
    // host store to a held dirty line
    @(negedge clk);
    pst_valid = 1; pst_addr = va(12) + 64'd64;
    @(negedge clk);
    while (!pst_ack) @(negedge clk);
    pst_valid = 0;
    host_load(va(12), hit, d);
    chk(!hit, "store snoop invalidated the line");
    for (int j = 0; j < 16; j++)
      d[32*j +: 32] = init_word(va(11) + 64'(4*j)) + init_word(va(13) + 64'(4*j));
    chk(mem.peek(va(12)) == d, "store snoop wrote the line back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
