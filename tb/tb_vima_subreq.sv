// tb_vima_subreq: self-checking test of the sub-request engine at a reduced 1 KB vector
// (16 sub-requests of 64 B per line, 4 row slots of 256 B), with the behavioural memory
// model answering out of order.
//
// It checks that a fetch writes every 64 B piece of memory into the right cache line and
// chunk, that a two-line fetch alternates its requests between the lines, that each
// line's requests follow the vault-first order (byte offset (k % 4) * 256 + (k / 4) * 64
// for the k-th request), that a write-back copies a line to memory, that `done` pulses
// once per job, and that an error response is reported in `err`.
module tb_vima_subreq;
  localparam int unsigned VB = 1024, SB = 64, RB = 256, CH = VB / SB, CW = 4;

  logic clk = 0, rst_n = 0;
  logic start = 0, write = 0, two = 0, busy, done, err;
  logic [2:0] way [2];
  logic [63:0] base [2];
  logic req_valid, req_ready, req_write, resp_valid, resp_err;
  logic [63:0] req_addr;
  logic [511:0] req_wdata, resp_rdata;
  logic [CW:0] req_tag, resp_tag;
  logic ck_rd_en, ck_wr_en;
  logic [2:0] ck_rd_way, ck_wr_way;
  logic [CW-1:0] ck_rd_idx, ck_wr_idx;
  logic [511:0] ck_rd_data, ck_wr_data;
  logic err_en = 0;
  logic [63:0] err_addr = 0;

  vima_subreq #(.VEC_BYTES(VB), .SUB_BYTES(SB), .ROW_BYTES(RB)) dut (.*);
  vima_vault_model #(.SUB_W(512), .TW(CW + 1)) mem (.*);

  // cache lines as the engine sees them
  logic [511:0] line [8][CH];
  always_ff @(posedge clk) begin
    if (ck_rd_en) ck_rd_data <= line[ck_rd_way][ck_rd_idx];
    if (ck_wr_en) line[ck_wr_way][ck_wr_idx] <= ck_wr_data;
  end

  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_done = 0;
  logic [63:0] seen_addr [$];
  logic seen_line [$];

  always @(posedge clk) begin
    if (done) n_done++;
    if (req_valid && req_ready) begin
      seen_addr.push_back(req_addr);
      seen_line.push_back(req_tag[CW]);
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  task automatic job(logic w, logic t, int w0, int w1, logic [63:0] b0, logic [63:0] b1);
    int d0;
    seen_addr.delete();
    seen_line.delete();
    d0 = n_done;
    @(negedge clk);
    start = 1; write = w; two = t; way[0] = 3'(w0); way[1] = 3'(w1); base[0] = b0; base[1] = b1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(n_done == d0 + 1, "one done pulse");
    chk(seen_addr.size() == (t ? 2 : 1) * CH, $sformatf("%0d requests", seen_addr.size()));
    // order: line alternation and vault-first offsets
    for (int i = 0; i < seen_addr.size(); i++) begin
      int k, l;
      l = t ? i % 2 : 0;
      k = t ? i / 2 : i;
      chk(seen_line[i] == 1'(l) &&
          seen_addr[i] == (l ? b1 : b0) + 64'((k % (VB / RB)) * RB + (k / (VB / RB)) * SB),
          $sformatf("request %0d address %h", i, seen_addr[i]));
    end
  endtask

  initial begin
    logic [63:0] A, B, C;
    A = 64'h4000; B = 64'h8000; C = 64'hC000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // single fetch
    job(0, 0, 5, 0, A, 0);
    chk(err == 0, "fetch error flag");
    for (int c = 0; c < CH; c++) chk(line[5][c] == mem.peek(A + 64'(64 * c)), $sformatf("fetch chunk %0d", c));
    // two-line fetch
    job(0, 1, 2, 6, B, C);
    for (int c = 0; c < CH; c++) begin
      chk(line[2][c] == mem.peek(B + 64'(64 * c)), $sformatf("fetch2 line0 chunk %0d", c));
      chk(line[6][c] == mem.peek(C + 64'(64 * c)), $sformatf("fetch2 line1 chunk %0d", c));
    end
    // write-back of modified lines
    for (int c = 0; c < CH; c++) begin
      line[5][c] = {16{$urandom}};
      line[6][c] = {16{$urandom}};
    end
    job(1, 1, 5, 6, A, C);
    chk(err == 0, "write-back error flag");
    for (int c = 0; c < CH; c++) begin
      chk(mem.peek(A + 64'(64 * c)) == line[5][c], $sformatf("write-back line0 chunk %0d", c));
      chk(mem.peek(C + 64'(64 * c)) == line[6][c], $sformatf("write-back line1 chunk %0d", c));
    end
    // error response
    err_en = 1; err_addr = B + 64'd320;
    job(0, 0, 1, 0, B, 0);
    chk(err == 1, "error reported");
    err_en = 0;
    job(0, 0, 1, 0, B, 0);
    chk(err == 0, "error cleared by the next job");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
