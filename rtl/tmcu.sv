// tmcu: the Temporal Memory Coalescing Unit of one LDST port.
//
// Thread requests reach a port one per cycle, in order, instead of all at
// once as in a GPU warp.  The TMCU keeps one coalescing buffer, a command for
// one 32-byte sector.  Every cycle (Algorithm 1 of the paper): if the buffer
// holds a command its timer counts down, and when the timer runs out the
// command is sent (popped) and the timer is reset to max_interval.  A new
// request starts a command in an empty buffer, is merged into the buffered
// command if it can be, or else the buffered command is sent and the request
// starts a new one.  A request can be merged if it has the same direction
// (load/store), the same sector, the same e-block and destination, and a word
// not yet used by the command.  With `enable` low nothing is merged (the
// baseline LDST port: one word per command).  Sent commands wait in a one-entry
// output register until the LDST crossbar takes them; while it is full and a
// send would be needed the TMCU holds (in_ready low, timer paused).  The
// merge rule's details (what "compatible" means) are this design's choice;
// MAX_INTERVAL = 8 matches the paper's 32-byte sector of 4-byte words.
module tmcu
  import dice_pkg::*;
#(
  parameter int unsigned MAX_INTERVAL = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        in_valid,
  output logic        in_ready,
  input  thread_req_t in_req,
  output logic        out_valid,
  input  logic        out_ready,
  output coal_cmd_t   out_cmd,
  output logic        busy
);
  coal_cmd_t buf_q;
  logic      buf_v;
  logic [$clog2(MAX_INTERVAL+1)-1:0] timer;
  logic      slot_free, timeout, can_coal, need_pop;
  logic [2:0] w;
  logic      v;                      // buffer occupancy during the update

  assign w         = in_req.addr[4:2];
  assign slot_free = !out_valid || out_ready;
  assign timeout   = buf_v && timer == 0;
  assign can_coal  = enable && buf_v && !timeout &&
                     buf_q.is_store == in_req.is_store &&
                     buf_q.sector   == in_req.addr[31:5] &&
                     buf_q.ebid     == in_req.ebid &&
                     buf_q.dest     == in_req.dest &&
                     buf_q.to_const == in_req.to_const &&
                     !buf_q.wmask[w];
  // a send is needed on timeout or when a request cannot be merged
  assign need_pop  = timeout || (in_valid && buf_v && !can_coal);
  assign in_ready  = slot_free || !need_pop;
  assign busy      = buf_v || out_valid;

  function automatic coal_cmd_t initial_cmd(thread_req_t r);
    coal_cmd_t c;
    c          = '0;
    c.is_store = r.is_store;
    c.sector   = r.addr[31:5];
    c.wmask[r.addr[4:2]] = 1'b1;
    c.data[r.addr[4:2]]  = r.data;
    c.tid[r.addr[4:2]]   = r.tid;
    c.ebid     = r.ebid;
    c.dest     = r.dest;
    c.to_const = r.to_const;
    return c;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0; buf_v <= 1'b0; timer <= '0;
      out_valid <= 1'b0; out_cmd <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (!need_pop || slot_free) begin
        v = buf_v;
        if (buf_v && !timeout) timer <= timer - 1'b1;
        if (need_pop) begin                 // pop to the crossbar
          out_valid <= 1'b1;
          out_cmd   <= buf_q;
          v          = 1'b0;
        end
        if (in_valid) begin
          if (!v) begin                     // initial
            buf_q <= initial_cmd(in_req);
            timer <= ($clog2(MAX_INTERVAL+1))'(MAX_INTERVAL);
            v      = 1'b1;
          end else begin                    // coalesce
            buf_q.wmask[w] <= 1'b1;
            buf_q.data[w]  <= in_req.data;
            buf_q.tid[w]   <= in_req.tid;
          end
        end
        buf_v <= v;
      end
    end
  end
endmodule
