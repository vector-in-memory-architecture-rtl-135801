// vima_subreq: splits VIMA cache line transfers into 64 B sub-requests to the vaults.
//
// A job moves one or two whole vector lines between the VIMA cache and memory: a fetch
// (write = 0) reads them from the vaults into the given cache lines, a write-back
// (write = 1) copies the lines out to memory. Each 8 KB line becomes CHUNKS = 128
// sub-requests of 64 B. The k-th sub-request of a line targets byte offset
// (k % R) * ROW_BYTES + (k / R) * SUB_BYTES, with R = VEC_BYTES / ROW_BYTES = 32 row
// slots: consecutive requests go to different vaults (one 256 B row per vault), and
// each vault gets four 64 B pieces of one row. When a job has two lines their requests
// alternate, so both operands are in flight together.
//
// Memory side: req_valid/req_ready handshake carrying write flag, byte address, 64 B of
// write data and a tag {line, chunk}; one response per request (read data or a write
// acknowledge) with the tag and an error flag; responses may come back in any order and
// are always accepted. Cache side: a 64 B read port (one cycle latency, used for
// write-back data, read one request ahead so that one request can leave per cycle) and
// a 64 B write port for fill data. `done` pulses for one cycle when every response of
// the job has arrived; `err` is then set if any response reported an error.
// The split into 128 sub-requests to different vaults and banks is the architecture's;
// the request order, tags and handshakes are this design's choice.
module vima_subreq #(
  parameter int unsigned VEC_BYTES = vima_pkg::VEC_BYTES,
  parameter int unsigned SUB_BYTES = vima_pkg::SUB_BYTES,
  parameter int unsigned ROW_BYTES = vima_pkg::ROW_BYTES,
  parameter int unsigned ADDR_W    = vima_pkg::ADDR_W,
  parameter int unsigned WAYS      = vima_pkg::WAYS,
  parameter int unsigned CHUNKS    = VEC_BYTES / SUB_BYTES,
  parameter int unsigned CW        = $clog2(CHUNKS),
  parameter int unsigned WW        = $clog2(WAYS),
  parameter int unsigned SUB_W     = SUB_BYTES * 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // job
  input  logic                 start,
  input  logic                 write,
  input  logic                 two,
  input  logic [WW-1:0]        way   [2],
  input  logic [ADDR_W-1:0]    base  [2],
  output logic                 busy,
  output logic                 done,
  output logic                 err,
  // vault side
  output logic                 req_valid,
  input  logic                 req_ready,
  output logic                 req_write,
  output logic [ADDR_W-1:0]    req_addr,
  output logic [SUB_W-1:0]     req_wdata,
  output logic [CW:0]          req_tag,
  input  logic                 resp_valid,
  input  logic [CW:0]          resp_tag,
  input  logic [SUB_W-1:0]     resp_rdata,
  input  logic                 resp_err,
  // cache side
  output logic                 ck_rd_en,
  output logic [WW-1:0]        ck_rd_way,
  output logic [CW-1:0]        ck_rd_idx,
  input  logic [SUB_W-1:0]     ck_rd_data,
  output logic                 ck_wr_en,
  output logic [WW-1:0]        ck_wr_way,
  output logic [CW-1:0]        ck_wr_idx,
  output logic [SUB_W-1:0]     ck_wr_data
);
  localparam int unsigned R  = VEC_BYTES / ROW_BYTES;   // row slots per vector
  localparam int unsigned PW = $clog2(ROW_BYTES / SUB_BYTES);

  logic              j_write, j_two;
  logic [WW-1:0]     j_way  [2];
  logic [ADDR_W-1:0] j_base [2];
  logic [CW+1:0]     n_issued, n_resp, n_total;
  logic              j_err, active, rd_ahead;

  // chunk index (byte offset / SUB_BYTES) of the k-th sub-request of a line
  function automatic logic [CW-1:0] chunk_of(logic [CW-1:0] k);
    int unsigned kk;
    kk = int'(k);
    return CW'(((kk % R) * ROW_BYTES + (kk / R) * SUB_BYTES) / SUB_BYTES);
  endfunction

  logic          cur_line;
  logic [CW-1:0] cur_k, cur_chunk;
  logic [CW+1:0] nxt;
  logic          nxt_line;
  logic [CW-1:0] nxt_k;

  assign cur_line  = j_two ? n_issued[0] : 1'b0;
  assign cur_k     = j_two ? n_issued[CW:1] : n_issued[CW-1:0];
  assign cur_chunk = chunk_of(cur_k);
  assign nxt       = n_issued + 1'b1;
  assign nxt_line  = j_two ? nxt[0] : 1'b0;
  assign nxt_k     = j_two ? nxt[CW:1] : nxt[CW-1:0];

  assign n_total   = j_two ? (CW+2)'(2 * CHUNKS) : (CW+2)'(CHUNKS);
  assign busy      = active;

  // requests
  assign req_valid = active && (n_issued < n_total) && (!j_write || rd_ahead);
  assign req_write = j_write;
  assign req_addr  = j_base[cur_line] + ADDR_W'(cur_chunk) * ADDR_W'(SUB_BYTES);
  assign req_wdata = ck_rd_data;
  assign req_tag   = {cur_line, cur_chunk};

  // write-back data is read one request ahead
  always_comb begin
    ck_rd_en  = 1'b0;
    ck_rd_way = j_way[cur_line];
    ck_rd_idx = cur_chunk;
    if (active && j_write) begin
      if (!rd_ahead && n_issued < n_total) begin
        ck_rd_en = 1'b1;
      end else if (req_valid && req_ready && nxt < n_total) begin
        ck_rd_en  = 1'b1;
        ck_rd_way = j_way[nxt_line];
        ck_rd_idx = chunk_of(nxt_k);
      end
    end
  end

  // fills
  assign ck_wr_en   = active && !j_write && resp_valid;
  assign ck_wr_way  = j_way[resp_tag[CW]];
  assign ck_wr_idx  = resp_tag[CW-1:0];
  assign ck_wr_data = resp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active   <= 1'b0;
      done     <= 1'b0;
      err      <= 1'b0;
      j_err    <= 1'b0;
      j_write  <= 1'b0;
      j_two    <= 1'b0;
      j_way    <= '{default: '0};
      j_base   <= '{default: '0};
      n_issued <= '0;
      n_resp   <= '0;
      rd_ahead <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start) begin
          active   <= 1'b1;
          j_write  <= write;
          j_two    <= two;
          j_way    <= way;
          j_base   <= base;
          n_issued <= '0;
          n_resp   <= '0;
          j_err    <= 1'b0;
          rd_ahead <= 1'b0;
        end
      end else begin
        if (ck_rd_en) rd_ahead <= 1'b1;
        else if (req_valid && req_ready) rd_ahead <= 1'b0;
        if (req_valid && req_ready) n_issued <= nxt;
        if (resp_valid) begin
          n_resp <= n_resp + 1'b1;
          if (resp_err) j_err <= 1'b1;
        end
        if (resp_valid && n_resp + 1'b1 == n_total) begin
          active <= 1'b0;
          done   <= 1'b1;
          err    <= j_err | resp_err;
        end
      end
    end
  end

  // Responses only arrive for requests of the running job.
  a_resp_outstanding: assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid |-> (active && n_resp < n_issued))
    else $error("vima_subreq: response without an outstanding request");

endmodule
