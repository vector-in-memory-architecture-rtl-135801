// vima_cache: the VIMA operand cache, 64 KB in eight fully associative 8 KB lines.
//
// Each line holds one whole vector operand, tagged by the vector's address divided by
// the vector size. Lines carry valid and dirty bits; replacement is least recently used,
// kept as one age counter per line (0 = most recent). An invalid line is chosen before
// the LRU line, and lines named in `protect` (operands of the running instruction) are
// never chosen.
//
// Ports, all owned by the sequencer:
//   lookup  : three combinational tag compares (the sequencer spends one cycle on them:
//             the "1-tag" cycle of the cache latency);
//   victim  : combinational choice of the line to replace, with its tag and dirty bit;
//   install : gives a line a new tag, leaves it invalid until filled, and makes it MRU;
//   mark    : sets valid/dirty of a line; inval clears it; touch makes a line MRU;
//   read A/B: two 1 KB beat read ports with one cycle latency (the two operand ports);
//   write   : one 1 KB beat write port (commit of the fill buffer);
//   chunk   : one 64 B read port (one cycle) and one 64 B write port, used by the vault
//             sub-request engine for fills and write-backs and for processor loads.
// The sequencer never drives conflicting writes to the same line in one cycle.
// Sizes, full associativity, LRU, two operand ports and dirty write-back follow the
// architecture; the age-counter LRU and the port split are this design's choice.
module vima_cache #(
  parameter int unsigned WAYS      = vima_pkg::WAYS,
  parameter int unsigned VEC_BYTES = vima_pkg::VEC_BYTES,
  parameter int unsigned BEAT_W    = vima_pkg::LANES32 * 32,
  parameter int unsigned ADDR_W    = vima_pkg::ADDR_W,
  parameter int unsigned SUB_W     = vima_pkg::SUB_BYTES * 8,
  parameter int unsigned BEATS     = VEC_BYTES * 8 / BEAT_W,
  parameter int unsigned CHUNKS    = VEC_BYTES * 8 / SUB_W,
  parameter int unsigned TAG_W     = ADDR_W - $clog2(VEC_BYTES),
  parameter int unsigned WW        = $clog2(WAYS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // lookups
  input  logic [TAG_W-1:0]           lk_tag   [3],
  output logic                       lk_hit   [3],
  output logic [WW-1:0]              lk_way   [3],
  // replacement
  input  logic [WAYS-1:0]            protect,
  output logic [WW-1:0]              victim_way,
  output logic                       victim_valid,
  output logic                       victim_dirty,
  output logic [TAG_W-1:0]           victim_tag,
  output logic                       victim_found,
  // metadata updates
  input  logic                       install_en,
  input  logic [WW-1:0]              install_way,
  input  logic [TAG_W-1:0]           install_tag,
  input  logic                       mark_en,
  input  logic [WW-1:0]              mark_way,
  input  logic                       mark_dirty,
  input  logic                       inval_en,
  input  logic [WW-1:0]              inval_way,
  input  logic                       clean_en,
  input  logic [WW-1:0]              clean_way,
  input  logic                       touch_en,
  input  logic [WW-1:0]              touch_way,
  output logic [WAYS-1:0]            line_valid,
  output logic [WAYS-1:0]            line_dirty,
  output logic [TAG_W-1:0]           line_tag [WAYS],
  // operand read ports
  input  logic                       rda_en,
  input  logic [WW-1:0]              rda_way,
  input  logic [$clog2(BEATS)-1:0]   rda_beat,
  output logic [BEAT_W-1:0]          rda_data,
  input  logic                       rdb_en,
  input  logic [WW-1:0]              rdb_way,
  input  logic [$clog2(BEATS)-1:0]   rdb_beat,
  output logic [BEAT_W-1:0]          rdb_data,
  // result write port
  input  logic                       wr_en,
  input  logic [WW-1:0]              wr_way,
  input  logic [$clog2(BEATS)-1:0]   wr_beat,
  input  logic [BEAT_W-1:0]          wr_data,
  // 64 B port
  input  logic                       ck_rd_en,
  input  logic [WW-1:0]              ck_rd_way,
  input  logic [$clog2(CHUNKS)-1:0]  ck_rd_idx,
  output logic [SUB_W-1:0]           ck_rd_data,
  input  logic                       ck_wr_en,
  input  logic [WW-1:0]              ck_wr_way,
  input  logic [$clog2(CHUNKS)-1:0]  ck_wr_idx,
  input  logic [SUB_W-1:0]           ck_wr_data
);
  localparam int unsigned BB  = $clog2(BEATS);
  localparam int unsigned CPB = BEAT_W / SUB_W;          // 64 B chunks per beat
  localparam int unsigned CB  = $clog2(CPB);

  logic [BEAT_W-1:0] mem [WAYS * BEATS];
  logic [TAG_W-1:0]  tags  [WAYS];
  logic [WAYS-1:0]   valid, dirty;
  logic [WW-1:0]     age   [WAYS];
  logic [WW-1:0]     mru_way;

  assign mru_way = touch_en ? touch_way : install_way;

  // ---------------------------------------------------------------- lookup
  always_comb begin
    for (int p = 0; p < 3; p++) begin
      lk_hit[p] = 1'b0;
      lk_way[p] = '0;
      for (int w = 0; w < WAYS; w++) begin
        if (valid[w] && tags[w] == lk_tag[p]) begin
          lk_hit[p] = 1'b1;
          lk_way[p] = WW'(w);
        end
      end
    end
  end

  // ---------------------------------------------------------------- victim choice
  always_comb begin
    logic          have_inv;
    logic [WW-1:0] oldest;
    have_inv     = 1'b0;
    victim_found = 1'b0;
    victim_way   = '0;
    oldest       = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!protect[w]) begin
        if (!valid[w] && !have_inv) begin
          have_inv   = 1'b1;
          victim_way = WW'(w);
        end else if (!have_inv && (!victim_found || age[w] > oldest)) begin
          victim_way = WW'(w);
          oldest     = age[w];
        end
        victim_found = 1'b1;
      end
    end
    victim_valid = valid[victim_way];
    victim_dirty = valid[victim_way] && dirty[victim_way];
    victim_tag   = tags[victim_way];
  end

  // ---------------------------------------------------------------- metadata
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      dirty <= '0;
      for (int w = 0; w < WAYS; w++) begin
        tags[w] <= '0;
        age[w]  <= WW'(w);
      end
    end else begin
      if (install_en) begin
        tags[install_way]  <= install_tag;
        valid[install_way] <= 1'b0;
        dirty[install_way] <= 1'b0;
      end
      if (mark_en) begin
        valid[mark_way] <= 1'b1;
        dirty[mark_way] <= mark_dirty;
      end
      if (clean_en) dirty[clean_way] <= 1'b0;
      if (inval_en) begin
        valid[inval_way] <= 1'b0;
        dirty[inval_way] <= 1'b0;
      end
      if (touch_en || install_en) begin
        for (int w = 0; w < WAYS; w++) begin
          if (WW'(w) == mru_way) age[w] <= '0;
          else if (age[w] < age[mru_way]) age[w] <= age[w] + 1'b1;
        end
      end
    end
  end

  assign line_valid = valid;
  assign line_dirty = dirty;
  assign line_tag   = tags;

  // ---------------------------------------------------------------- data
  always_ff @(posedge clk) begin
    if (rda_en) rda_data <= mem[{rda_way, rda_beat}];
    if (rdb_en) rdb_data <= mem[{rdb_way, rdb_beat}];
    if (ck_rd_en)
      ck_rd_data <= mem[{ck_rd_way, ck_rd_idx[$clog2(CHUNKS)-1:CB]}][SUB_W * ck_rd_idx[CB-1:0] +: SUB_W];
    if (wr_en) mem[{wr_way, wr_beat}] <= wr_data;
    if (ck_wr_en)
      mem[{ck_wr_way, ck_wr_idx[$clog2(CHUNKS)-1:CB]}][SUB_W * ck_wr_idx[CB-1:0] +: SUB_W] <= ck_wr_data;
  end

  // The age counters stay a permutation of 0..WAYS-1.
  always_comb begin
    if (rst_n) begin
      for (int i = 0; i < WAYS; i++)
        for (int j = i + 1; j < WAYS; j++)
          assert (age[i] != age[j]) else $error("vima_cache: LRU ages collide");
    end
  end

endmodule
