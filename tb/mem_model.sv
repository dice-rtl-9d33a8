// mem_model: behavioural model of the memory behind a DICE memory port (the
// L1/L2/DRAM path), for testbenches only.  Sector requests (32 bytes) are
// accepted when `stall` is low, and answered in order LATENCY cycles later
// with the request's tag; a response waits while rsp_ready is low.  Memory
// content is a sparse array of 32-bit words; stores write the words in
// wmask and are acknowledged with a response of their own.  Testbenches use
// the write_word/read_word tasks as a back door.
module mem_model
  import dice_pkg::*;
#(
  parameter int unsigned LATENCY = 20
) (
  input  logic     clk,
  input  logic     stall,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  input  logic     rsp_ready,
  output mem_rsp_t rsp
);
  logic [31:0] mem [int unsigned];
  typedef struct { mem_rsp_t r; longint due; } ent_t;
  ent_t   q[$];
  longint cyc = 0;
  int     n_req = 0;

  function automatic logic [31:0] read_word(int unsigned a);
    return mem.exists(a >> 2) ? mem[a >> 2] : 32'd0;
  endfunction
  function automatic void write_word(int unsigned a, logic [31:0] d);
    mem[a >> 2] = d;
  endfunction

  assign req_ready = !stall;
  always_comb begin
    rsp_valid = q.size() > 0 && q[0].due <= cyc;
    rsp       = (q.size() > 0) ? q[0].r : '0;
  end

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rsp_valid && rsp_ready) void'(q.pop_front());
    if (req_valid && req_ready) begin
      ent_t e;
      e.r          = '0;
      e.r.is_store = req.is_store;
      e.r.wmask    = req.wmask;
      e.r.tag      = req.tag;
      for (int w = 0; w < SECTOR_WORDS; w++) begin
        int unsigned a;
        a = req.addr + 32'(w * 4);
        if (req.is_store && req.wmask[w]) mem[a >> 2] = req.wdata[w];
        e.r.rdata[w] = mem.exists(a >> 2) ? mem[a >> 2] : 32'd0;
      end
      e.due = cyc + LATENCY;
      q.push_back(e);
      n_req++;
    end
  end
endmodule
