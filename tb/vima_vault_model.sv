// vima_vault_model: behavioural model of the memory cube behind VIMA (crossbar, vault
// controllers and DRAM), for testbenches only.
//
// Accepts 64 B read/write sub-requests with a random ready, answers each one after a
// random delay of MIN_LAT..MAX_LAT cycles, one response per cycle, so responses come
// back out of order. Storage is sparse; a block never written reads as
// vima_tb_pkg::init_block(address). A request to the block `err_addr` (when err_en is
// set) is answered with the error flag and does not change memory. It counts the
// requests it received per vault with the assumed address map.
module vima_vault_model #(
  parameter int unsigned SUB_W   = 512,
  parameter int unsigned TW      = 8,
  parameter int unsigned MIN_LAT = 4,
  parameter int unsigned MAX_LAT = 24,
  parameter int unsigned QMAX    = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_write,
  input  logic [63:0]       req_addr,
  input  logic [SUB_W-1:0]  req_wdata,
  input  logic [TW-1:0]     req_tag,
  output logic              resp_valid,
  output logic [TW-1:0]     resp_tag,
  output logic [SUB_W-1:0]  resp_rdata,
  output logic              resp_err,
  input  logic              err_en,
  input  logic [63:0]       err_addr
);
  typedef struct {
    longint       due;
    logic [TW-1:0] tag;
    logic [SUB_W-1:0] data;
    logic         err;
  } resp_t;

  logic [SUB_W-1:0] mem [logic [63:0]];
  resp_t            q [$];
  longint           now = 0;
  int unsigned      reads = 0, writes = 0;
  int unsigned      per_vault [32];
  int unsigned      vault_switches = 0;
  int               last_vault = -1;

  function automatic logic [SUB_W-1:0] peek(logic [63:0] a);
    if (mem.exists(a)) return mem[a];
    return vima_tb_pkg::init_block(a);
  endfunction

  always_ff @(posedge clk) begin
    now <= now + 1;
    req_ready <= ($urandom % 8) != 0 && q.size() < QMAX;
    resp_valid <= 1'b0;
    if (rst_n) begin
      if (req_valid && req_ready) begin
        resp_t r;
        int v;
        r.due = now + longint'(MIN_LAT + $urandom % (MAX_LAT - MIN_LAT + 1));
        r.tag = req_tag;
        r.err = err_en && (req_addr == err_addr);
        r.data = '0;
        if (!req_write) r.data = peek(req_addr);
        else if (!r.err) mem[req_addr] = req_wdata;
        if (req_write) writes++; else reads++;
        v = int'((req_addr >> 8) % 32);
        per_vault[v]++;
        if (v != last_vault) vault_switches++;
        last_vault = v;
        q.push_back(r);
      end
      for (int i = 0; i < q.size(); i++) begin
        if (q[i].due <= now) begin
          resp_valid <= 1'b1;
          resp_tag   <= q[i].tag;
          resp_rdata <= q[i].data;
          resp_err   <= q[i].err;
          q.delete(i);
          break;
        end
      end
    end
  end

endmodule
