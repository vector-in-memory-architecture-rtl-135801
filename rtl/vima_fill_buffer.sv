// vima_fill_buffer: holds the result vector of the running VIMA instruction.
//
// The functional units write their result beats here (any order, one beat per cycle).
// When the instruction completes without an exception the sequencer reads the beats
// back, one per cycle with one cycle of latency, and writes them into the destination
// line of the VIMA cache as a full line, so no read-modify-write is ever needed. `full`
// is set once every beat of the vector has been written since the last `clear`.
// The buffer of results and the write-at-status-time use come from the architecture;
// the beat organisation and the `full` tracking are this design's choice.
module vima_fill_buffer #(
  parameter int unsigned BEAT_W = vima_pkg::LANES32 * 32,
  parameter int unsigned BEATS  = vima_pkg::VEC_BYTES / (vima_pkg::LANES32 * 4)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      wr_en,
  input  logic [$clog2(BEATS)-1:0]  wr_beat,
  input  logic [BEAT_W-1:0]         wr_data,
  input  logic                      rd_en,
  input  logic [$clog2(BEATS)-1:0]  rd_beat,
  output logic [BEAT_W-1:0]         rd_data,
  output logic                      full
);
  logic [BEAT_W-1:0] mem [BEATS];
  logic [BEATS-1:0]  written;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_beat] <= wr_data;
    if (rd_en) rd_data <= mem[rd_beat];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) written <= '0;
    else if (clear) written <= '0;
    else if (wr_en) written[wr_beat] <= 1'b1;
  end

  assign full = &written;

endmodule
