// tb_vima_top: end-to-end test of the VIMA block at its full size (8 KB vectors, 256
// units, 64 KB cache, 128 sub-requests per vector), against a behavioural memory cube.
//
// A host model sends one instruction at a time and waits for its status, like the host
// processor. The sequence follows the evaluated kernels (memory set, memory copy, vector
// sum, a stencil-like chain that reuses cached vectors, an element-wise multiply), then
// fills the cache until dirty lines are evicted, and provokes every exception the
// design reports. A reference model keeps the architectural memory content; every
// vector touched is finally read back through the host-load path (served by the VIMA
// cache when it holds the block, else taken from memory) and compared.
// It also checks the latency of an instruction whose operands are all cached
// (tag check + read + unit latency + fill buffer write + status), that sub-requests
// walk the vaults, and it counts each mechanism and fails if one never happened.
module tb_vima_top;
  import vima_pkg::*;
  import vima_tb_pkg::*;

  localparam int unsigned NW = VEC_BYTES / 4;    // 32-bit words per vector
  localparam int unsigned NB = VEC_BYTES / 64;   // 64 B blocks per vector

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
  logic [7:0] mem_req_tag, mem_resp_tag;
  logic err_en = 0;
  logic [63:0] err_addr = 0;

  vima_top dut (.*);

  vima_vault_model #(.SUB_W(512), .TW(8)) mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_write(mem_req_write), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .req_tag(mem_req_tag), .resp_valid(mem_resp_valid), .resp_tag(mem_resp_tag),
    .resp_rdata(mem_resp_rdata), .resp_err(mem_resp_err), .err_en, .err_addr);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL %s", msg);
    end
  endtask

  // ---------------------------------------------------------------- mechanism counters
  int n_allhit = 0, n_fetch2 = 0, n_fetch1 = 0, n_wb = 0, n_dst_alloc = 0;
  int n_exc [exc_e];
  int n_pld_hit = 0, n_pld_miss = 0, n_pst_wb = 0;

  always @(posedge clk) begin
    if (dut.u_seq.st.name() == "S_TAG" && dut.u_seq.t_miss1 == 0 && dut.u_seq.t_miss2 == 0 &&
        dut.u_seq.t_dalloc == 0) n_allhit++;
    if (dut.u_seq.st.name() == "S_TAG" && dut.u_seq.t_dalloc) n_dst_alloc++;
    if (dut.sr_start && !dut.sr_write) begin
      if (dut.sr_two) n_fetch2++; else n_fetch1++;
    end
    if (dut.sr_start && dut.sr_write) n_wb++;
    if (pld_resp_valid) begin
      if (pld_hit) n_pld_hit++; else n_pld_miss++;
    end
  end

  // ---------------------------------------------------------------- reference memory
  logic [511:0] ref_mem [logic [63:0]];

  function automatic logic [511:0] ref_block(logic [63:0] a);
    if (ref_mem.exists(a)) return ref_mem[a];
    return init_block(a);
  endfunction

  function automatic logic [31:0] ref_word(logic [63:0] a);
    logic [511:0] b;
    b = ref_block({a[63:6], 6'b0});
    return b[32 * a[5:2] +: 32];
  endfunction

  function automatic logic [63:0] vaddr(int i);
    return 64'h0010_0000 + 64'(i) * 64'(VEC_BYTES);
  endfunction

  // architectural effect of a successful instruction
  task automatic ref_exec(vinstr_t in);
    logic [31:0] res [NW];
    for (int w = 0; w < NW; w += 2) begin
      logic [63:0] a, b, r;
      a = {ref_word(in.src1 + 64'(4*w + 4)), ref_word(in.src1 + 64'(4*w))};
      b = in.use_scalar ? (is_64(in.etype) ? in.scalar : {in.scalar[31:0], in.scalar[31:0]})
                        : {ref_word(in.src2 + 64'(4*w + 4)), ref_word(in.src2 + 64'(4*w))};
      case (in.op)
        OP_SET: r = is_64(in.etype) ? in.scalar : {in.scalar[31:0], in.scalar[31:0]};
        OP_MOV: r = a;
        OP_ADD: if (in.etype == T_F32) r = {fadd32(a[63:32], b[63:32]), fadd32(a[31:0], b[31:0])};
                else if (in.etype == T_F64) r = $realtobits($bitstoreal(a) + $bitstoreal(b));
                else r = {a[63:32] + b[63:32], a[31:0] + b[31:0]};
        OP_MUL: if (in.etype == T_F32) r = {fmul32(a[63:32], b[63:32]), fmul32(a[31:0], b[31:0])};
                else r = $realtobits($bitstoreal(a) * $bitstoreal(b));
        OP_MAX: r = (a > b) ? a : b;   // U64
        default: r = 'x;
      endcase
      res[w] = r[31:0];
      res[w+1] = r[63:32];
    end
    for (int blk = 0; blk < NB; blk++) begin
      logic [511:0] d;
      for (int j = 0; j < 16; j++) d[32*j +: 32] = res[16*blk + j];
      ref_mem[in.dst + 64'(64 * blk)] = d;
    end
  endtask

  // ---------------------------------------------------------------- host model
  task automatic issue(vinstr_t in, output vstatus_t st, output longint lat);
    longint t0;
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr_valid = 1;
    instr = in;
    @(posedge clk);
    t0 = cyc;
    @(negedge clk);
    instr_valid = 0;
    while (!status_valid) @(negedge clk);
    st = status;
    lat = cyc - t0;
  endtask

  task automatic run(vinstr_t in, exc_e expect_cause, string what, int exp_lat = -1);
    vstatus_t st;
    longint lat;
    issue(in, st, lat);
    $display("[%0d] %s: ok=%b cause=%s latency=%0d", cyc, what, st.ok, st.cause.name(), lat);
    chk(st.ok == (expect_cause == EXC_NONE) && st.cause == expect_cause,
        $sformatf("%s: status ok=%b cause=%s, expected %s", what, st.ok, st.cause.name(), expect_cause.name()));
    if (st.cause != EXC_NONE) n_exc[st.cause]++;
    if (st.ok) ref_exec(in);
    if (exp_lat >= 0)
      chk(lat == longint'(exp_lat), $sformatf("%s: latency %0d, expected %0d", what, lat, exp_lat));
  endtask

  function automatic vinstr_t mk(vop_e op, etype_e t, int d, int s1, int s2,
                                 logic us = 0, logic [63:0] sc = 0);
    vinstr_t i;
    i.op = op; i.etype = t; i.use_scalar = us;
    i.dst = vaddr(d); i.src1 = vaddr(s1); i.src2 = vaddr(s2); i.scalar = sc;
    return i;
  endfunction

  task automatic host_load(logic [63:0] a, output logic hit, output logic [511:0] d);
    @(negedge clk);
    pld_valid = 1; pld_addr = a;
    @(negedge clk);
    while (!pld_resp_valid) @(negedge clk);
    pld_valid = 0;
    hit = pld_hit;
    d = pld_data;
  endtask

  task automatic host_store(logic [63:0] a);
    @(negedge clk);
    pst_valid = 1; pst_addr = a;
    @(negedge clk);
    while (!pst_ack) @(negedge clk);
    pst_valid = 0;
    chk(pst_err == 0, "store snoop write-back error");
  endtask

  // compare a whole vector with the reference, through the host-load path
  task automatic verify_vec(int i, string what);
    int bad = 0;
    for (int blk = 0; blk < NB; blk++) begin
      logic hit;
      logic [511:0] d, e;
      logic [63:0] a;
      a = vaddr(i) + 64'(64 * blk);
      host_load(a, hit, d);
      if (!hit) d = mem.peek(a);
      e = ref_block(a);
      if (d !== e) begin
        bad++;
        if (bad < 3) $display("  vec %0d block %0d (%s) got %h exp %h", i, blk, hit ? "cache" : "memory", d[63:0], e[63:0]);
      end
    end
    chk(bad == 0, $sformatf("%s: vector %0d has %0d wrong blocks", what, i, bad));
  endtask

  initial begin
    vstatus_t st;
    vinstr_t in;
    logic hit;
    logic [511:0] d;
    instr = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;

    // MemSet and MemCopy
    run(mk(OP_SET, T_U32, 0, 0, 0, 0, 64'h1122_3344), EXC_NONE, "memset");
    run(mk(OP_MOV, T_U32, 1, 0, 0), EXC_NONE, "memcopy (source cached)");
    run(mk(OP_MOV, T_U32, 9, 8, 0), EXC_NONE, "memcopy (source fetched)");
    // VecSum: two missing operands fetched together
    run(mk(OP_ADD, T_F32, 2, 3, 4), EXC_NONE, "vecsum");
    // everything cached: check latency
    run(mk(OP_ADD, T_F32, 2, 3, 4), EXC_NONE, "vecsum all cached", 6 + LAT_FALU);
    run(mk(OP_MAX, T_U64, 4, 3, 4), EXC_NONE, "max all cached", 6 + LAT_IALU);
    run(mk(OP_MUL, T_F32, 3, 3, 4, 1, 64'h3f00_0000), EXC_NONE, "scale by 0.5", 6 + LAT_FMUL);
    // stencil-like chain: out = a + b + c + d + e, reusing a cached partial sum
    run(mk(OP_ADD, T_F32, 10, 11, 12), EXC_NONE, "stencil 1");
    run(mk(OP_ADD, T_F32, 10, 10, 13), EXC_NONE, "stencil 2");
    run(mk(OP_ADD, T_F32, 10, 10, 14), EXC_NONE, "stencil 3");
    run(mk(OP_ADD, T_F32, 10, 10, 3), EXC_NONE, "stencil 4");
    run(mk(OP_MUL, T_F64, 15, 10, 2), EXC_NONE, "f64 multiply");
    // exceptions
    in = mk(OP_ADD, T_F32, 16, 0, 1);
    in.src1 += 64;
    run(in, EXC_ALIGN, "misaligned source");
    in = mk(OP_ADD, T_F32, 16, 0, 1);
    in.op = vop_e'(4'd15);
    run(in, EXC_OPCODE, "undefined opcode");
    run(mk(OP_DIV, T_I32, 16, 1, 0, 1, 64'd0), EXC_DIVZERO, "integer divide by zero");
    run(mk(OP_SET, T_F32, 17, 0, 0, 0, 64'h7f80_0000), EXC_NONE, "set infinity");
    run(mk(OP_SUB, T_F32, 18, 17, 17), EXC_FPINV, "inf - inf");
    err_en = 1;
    err_addr = vaddr(20) + 64'(64 * 77);
    run(mk(OP_MOV, T_U32, 21, 20, 0), EXC_MEM, "vault error");
    err_en = 0;
    // many more lines than the cache holds: LRU eviction of dirty lines
    for (int i = 0; i < 10; i++)
      run(mk(OP_ADD, T_F32, 22 + i, 40 + i, 10), EXC_NONE, $sformatf("stream %0d", i));
    // host store to a block of a dirty cached vector: write back and invalidate
    host_store(vaddr(31) + 64'd128);
    n_pst_wb = (mem.peek(vaddr(31)) === ref_block(vaddr(31))) ? 1 : 0;
    chk(n_pst_wb == 1, "store snoop wrote the dirty line back");
    host_load(vaddr(31), hit, d);
    chk(hit == 0, "store snoop invalidated the line");
    // host load of a cached vector
    host_load(vaddr(30) + 64'd256, hit, d);
    chk(hit == 1 && d === ref_block(vaddr(30) + 64'd256), "host load served by VIMA cache");

    // check every vector the program touched
    for (int i = 0; i < 32; i++) verify_vec(i, "final");

    // sub-requests walk the vaults
    chk(mem.vault_switches > (mem.reads + mem.writes) * 9 / 10, "sub-requests spread over vaults");
    for (int v = 0; v < 32; v++)
      chk(mem.per_vault[v] > 0, $sformatf("vault %0d never used", v));

    $display("mechanisms: all-cached=%0d dst-allocations=%0d single-fetch=%0d dual-fetch=%0d write-back-jobs=%0d pld-hit=%0d pld-miss=%0d",
             n_allhit, n_dst_alloc, n_fetch1, n_fetch2, n_wb, n_pld_hit, n_pld_miss);
    chk(n_allhit > 0, "no instruction found all operands cached");
    chk(n_dst_alloc > 0, "no destination allocation");
    chk(n_fetch1 > 0, "no single fetch");
    chk(n_fetch2 > 0, "no dual fetch");
    chk(n_wb > 1, "no dirty eviction");
    chk(n_pld_hit > 0 && n_pld_miss > 0, "host loads not both hit and miss");
    foreach (n_exc[c]) $display("exception %s: %0d", c.name(), n_exc[c]);
    chk(n_exc.size() == 5, "not every exception cause seen");
    $display("cycles: %0d, vault reads %0d writes %0d", cyc, mem.reads, mem.writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
