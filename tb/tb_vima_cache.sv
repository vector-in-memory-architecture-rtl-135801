// tb_vima_cache: self-checking test of the VIMA operand cache (4 KB of 8 lines at a
// reduced 512 B vector, 1024-bit beats, 512-bit chunks).
//
// A reference model in the testbench keeps tags, valid/dirty bits, LRU order and data.
// The test installs lines, fills them through the 64 B port, marks them, touches them
// in random order and checks: lookups on all three ports, that the victim is the first
// invalid line or else the least recently used unprotected line (with its tag and dirty
// bit), that protected lines are never chosen, that both beat read ports and the chunk
// read port return the reference data one cycle later, and that beat writes, chunk
// writes and invalidation update what later reads see.
module tb_vima_cache;
  localparam int unsigned WAYS = 8, VB = 512, BW = 1024, SW = 512, AW = 32;
  localparam int unsigned BEATS = VB * 8 / BW, CHUNKS = VB * 8 / SW, TW = AW - 9;

  logic clk = 0, rst_n = 0;
  logic [TW-1:0] lk_tag [3];
  logic lk_hit [3];
  logic [2:0] lk_way [3];
  logic [WAYS-1:0] protect = 0, line_valid, line_dirty;
  logic [2:0] victim_way;
  logic victim_valid, victim_dirty, victim_found;
  logic [TW-1:0] victim_tag, line_tag [WAYS];
  logic install_en = 0, mark_en = 0, mark_dirty = 0, inval_en = 0, clean_en = 0, touch_en = 0;
  logic [2:0] install_way = 0, mark_way = 0, inval_way = 0, clean_way = 0, touch_way = 0;
  logic [TW-1:0] install_tag = 0;
  logic rda_en = 0, rdb_en = 0, wr_en = 0, ck_rd_en = 0, ck_wr_en = 0;
  logic [2:0] rda_way = 0, rdb_way = 0, wr_way = 0, ck_rd_way = 0, ck_wr_way = 0;
  logic [$clog2(BEATS)-1:0] rda_beat = 0, rdb_beat = 0, wr_beat = 0;
  logic [$clog2(CHUNKS)-1:0] ck_rd_idx = 0, ck_wr_idx = 0;
  logic [BW-1:0] rda_data, rdb_data, wr_data = 0;
  logic [SW-1:0] ck_rd_data, ck_wr_data = 0;

  vima_cache #(.WAYS(WAYS), .VEC_BYTES(VB), .BEAT_W(BW), .ADDR_W(AW), .SUB_W(SW)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  // reference model
  logic [TW-1:0] r_tag [WAYS];
  logic r_valid [WAYS], r_dirty [WAYS];
  int   r_order [$];                      // front = most recently used
  logic [BW-1:0] r_data [WAYS][BEATS];
  logic filled [WAYS] = '{default: 0};

  function automatic void r_touch(int w);
    foreach (r_order[i]) if (r_order[i] == w) begin r_order.delete(i); break; end
    r_order.push_front(w);
  endfunction

  function automatic int r_victim(logic [WAYS-1:0] prot);
    for (int w = 0; w < WAYS; w++) if (!prot[w] && !r_valid[w]) return w;
    for (int i = r_order.size() - 1; i >= 0; i--) if (!prot[r_order[i]]) return r_order[i];
    return -1;
  endfunction

  task automatic step();
    @(negedge clk);
    install_en = 0; mark_en = 0; inval_en = 0; touch_en = 0; clean_en = 0;
    rda_en = 0; rdb_en = 0; wr_en = 0; ck_rd_en = 0; ck_wr_en = 0;
  endtask

  initial begin
    for (int w = 0; w < WAYS; w++) begin
      r_valid[w] = 0; r_dirty[w] = 0; r_tag[w] = 0;
      r_order.push_back(w);                // reset ages: way w has age w
    end
    for (int i = 0; i < 3; i++) lk_tag[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      int v, w, kind;
      logic [TW-1:0] t;
      step();   // every step starts just after a falling edge
      // victim check with a random protection mask
      protect = WAYS'($urandom) & WAYS'($urandom);
      #1;
      v = r_victim(protect);
      chk(victim_found == (v >= 0), "victim_found");
      if (v >= 0) begin
        chk(int'(victim_way) == v, $sformatf("it %0d victim way %0d expected %0d prot %b valid %b", it, victim_way, v, protect, line_valid));
        chk(victim_dirty == (r_valid[v] && r_dirty[v]) && (!r_valid[v] || victim_tag == r_tag[v]),
            "victim dirty/tag");
      end
      kind = $urandom % 6;
      case (kind)
        0: if (v >= 0) begin   // install a new tag in the victim and fill it
          t = TW'($urandom % 24);
          for (int x = 0; x < WAYS; x++) if (r_valid[x] && r_tag[x] == t) t = TW'(100 + it);
          install_en = 1; install_way = 3'(v); install_tag = t;
          r_tag[v] = t; r_valid[v] = 0; r_dirty[v] = 0; r_touch(v);
          step();
          for (int c = 0; c < CHUNKS; c++) begin
            ck_wr_en = 1; ck_wr_way = 3'(v); ck_wr_idx = 3'(c);
            ck_wr_data = {16{$urandom}};
            r_data[v][c / (BW / SW)][SW * (c % (BW / SW)) +: SW] = ck_wr_data;
            step();
          end
          filled[v] = 1;
          mark_en = 1; mark_way = 3'(v); mark_dirty = $urandom % 2;
          r_valid[v] = 1; r_dirty[v] = mark_dirty;
          step();
        end
        1: begin   // touch
          w = $urandom % WAYS;
          touch_en = 1; touch_way = 3'(w); r_touch(w);
          step();
        end
        2: begin   // beat write (a result commit)
          w = $urandom % WAYS;
          if (!filled[w]) begin step(); continue; end
          wr_en = 1; wr_way = 3'(w); wr_beat = $urandom % BEATS; wr_data = {32{$urandom}};
          r_data[w][wr_beat] = wr_data;
          step();
        end
        3: begin   // operand reads, both ports
          rda_en = 1; rda_way = 3'($urandom); rda_beat = $urandom % BEATS;
          rdb_en = 1; rdb_way = 3'($urandom); rdb_beat = $urandom % BEATS;
          step();
          if (filled[rda_way] && filled[rdb_way]) chk(rda_data == r_data[rda_way][rda_beat] && rdb_data == r_data[rdb_way][rdb_beat], "beat read");
        end
        4: begin   // chunk read
          ck_rd_en = 1; ck_rd_way = 3'($urandom); ck_rd_idx = 3'($urandom);
          step();
          if (filled[ck_rd_way]) chk(ck_rd_data == r_data[ck_rd_way][ck_rd_idx / (BW / SW)][SW * (ck_rd_idx % (BW / SW)) +: SW], "chunk read");
        end
        5: if ($urandom % 4 == 0) begin   // invalidate
          w = $urandom % WAYS;
          inval_en = 1; inval_way = 3'(w); r_valid[w] = 0; r_dirty[w] = 0;
          step();
        end
      endcase
      // lookups
      for (int p = 0; p < 3; p++) lk_tag[p] = (p == 0) ? r_tag[$urandom % WAYS] : TW'($urandom % 30);
      #1;
      for (int p = 0; p < 3; p++) begin
        int hw;
        hw = -1;
        for (int x = 0; x < WAYS; x++) if (r_valid[x] && r_tag[x] == lk_tag[p]) hw = x;
        chk(lk_hit[p] == (hw >= 0) && (hw < 0 || int'(lk_way[p]) == hw),
            $sformatf("lookup port %0d tag %0d: hit %b way %0d, expected way %0d", p, lk_tag[p], lk_hit[p], lk_way[p], hw));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
