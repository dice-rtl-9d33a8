// ldst_unit: the load/store unit of a CP (DICE-optimised form, with TMCUs).
//
// Thread-level memory requests leave the CGRA on N_PORTS fixed ports, at most
// one per port per cycle.  Each port has a request FIFO followed by a TMCU
// that merges requests of consecutive threads into 32-byte sector commands.
// A round-robin crossbar takes one command per cycle from the TMCUs and sends
// it, with a tag naming the port, e-block, destination register and the
// thread of every word, on the CP's memory port towards the cluster's L1
// data cache / shared memory.  The FIFO's free slots are the credits the
// dispatcher checks (stall condition 2 of the paper).
//
// Responses return in any order.  A store response retires its words in one
// cycle.  A load response is written back to the register file: all its words
// are offered at once and words whose register bank is busy that cycle are
// offered again in the next (the swizzled banks make this rare); each word
// written releases its scoreboard bit.  Loads of a PARAMETER_LOAD p-graph go
// to the shared constant buffer instead, one word per cycle.  Every finished
// word is reported to the Block Retire Table.  FIFO depth and the crossbar
// policy are this design's choices; the FIFO + TMCU + crossbar structure is
// the paper's.
module ldst_unit
  import dice_pkg::*;
#(
  parameter int unsigned N_PORTS      = N_LDPORTS,
  parameter int unsigned FIFO_DEPTH   = 32,
  parameter int unsigned MAX_INTERVAL = 8
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 tmcu_enable,
  // from the CGRA outputs
  input  logic        [N_PORTS-1:0]            req_valid,
  input  thread_req_t [N_PORTS-1:0]            req,
  output logic        [N_PORTS-1:0][$clog2(FIFO_DEPTH):0] credit,
  output logic                                 busy,
  // memory port
  output logic                                 mem_req_valid,
  input  logic                                 mem_req_ready,
  output mem_req_t                             mem_req,
  input  logic                                 mem_rsp_valid,
  output logic                                 mem_rsp_ready,
  input  mem_rsp_t                             mem_rsp,
  // load writeback into the register file
  output logic [SECTOR_WORDS-1:0]              lw_en,
  output logic [SECTOR_WORDS-1:0][TID_W-1:0]   lw_tid,
  output logic [4:0]                           lw_reg,
  output logic [SECTOR_WORDS-1:0][XLEN-1:0]    lw_data,
  input  logic [SECTOR_WORDS-1:0]              lw_ack,
  output logic                                 cb_we,
  output logic [4:0]                           cb_idx,
  output logic [XLEN-1:0]                      cb_data,
  // scoreboard release and BRT completion
  output logic [SECTOR_WORDS-1:0]              rel_en,
  output logic [SECTOR_WORDS-1:0][TID_W-1:0]   rel_tid,
  output logic [REG_W-1:0]                     rel_reg,
  output logic [3:0]                           dec_ld,
  output logic [3:0]                           dec_st,
  output logic [EB_W-1:0]                      dec_id,
  // statistics
  output logic [31:0]                          n_cmds,
  output logic [31:0]                          n_words
);
  logic        [N_PORTS-1:0] f_valid, f_ready, t_valid, t_ready, t_busy;
  thread_req_t [N_PORTS-1:0] f_data;
  coal_cmd_t   [N_PORTS-1:0] t_cmd;

  for (genvar p = 0; p < N_PORTS; p++) begin : g_port
    logic unused_ready;
    sync_fifo #(.T(thread_req_t), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .in_valid(req_valid[p]), .in_ready(unused_ready), .in_data(req[p]),
      .out_valid(f_valid[p]), .out_ready(f_ready[p]), .out_data(f_data[p]), .free(credit[p])
    );
    tmcu #(.MAX_INTERVAL(MAX_INTERVAL)) u_tmcu (
      .clk, .rst_n, .enable(tmcu_enable), .in_valid(f_valid[p]), .in_ready(f_ready[p]),
      .in_req(f_data[p]), .out_valid(t_valid[p]), .out_ready(t_ready[p]), .out_cmd(t_cmd[p]),
      .busy(t_busy[p])
    );
    always_ff @(posedge clk) if (rst_n) assert (!(req_valid[p] && !unused_ready))
      else $error("ldst_unit: port %0d FIFO overflow (credit violated)", p);
  end

  // ---------------------------------------------------------------- crossbar
  logic [$clog2(N_PORTS)-1:0] rr, pick;
  logic                       any;
  always_comb begin
    any = 1'b0; pick = '0;
    for (int i = 1; i <= N_PORTS; i++) begin
      automatic logic [$clog2(N_PORTS)-1:0] p = ($clog2(N_PORTS))'((int'(rr) + i) % N_PORTS);
      if (!any && t_valid[p]) begin any = 1'b1; pick = p; end
    end
    t_ready = '0;
    if (any && mem_req_ready) t_ready[pick] = 1'b1;
    mem_req_valid    = any;
    mem_req          = '0;
    mem_req.is_store = t_cmd[pick].is_store;
    mem_req.addr     = {t_cmd[pick].sector, 5'd0};
    mem_req.wmask    = t_cmd[pick].wmask;
    mem_req.wdata    = t_cmd[pick].data;
    mem_req.tag.src  = SRC_LDST;
    mem_req.tag.port = 2'(pick);
    mem_req.tag.ebid = t_cmd[pick].ebid;
    mem_req.tag.dest = t_cmd[pick].dest;
    mem_req.tag.to_const = t_cmd[pick].to_const;
    mem_req.tag.tid  = t_cmd[pick].tid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0; n_cmds <= '0; n_words <= '0;
    end else if (any && mem_req_ready) begin
      rr      <= pick;
      n_cmds  <= n_cmds + 1;
      n_words <= n_words + 32'($countones(t_cmd[pick].wmask));
    end
  end

  // ---------------------------------------------------------------- responses
  mem_rsp_t                rsp;
  logic                    held;
  logic [SECTOR_WORDS-1:0] left, done_w;
  logic [2:0]              cw;       // constant-buffer word

  always_comb begin
    cw = '0;
    for (int w = SECTOR_WORDS - 1; w >= 0; w--) if (left[w]) cw = 3'(w);
    lw_en   = '0; cb_we = 1'b0; done_w = '0;
    if (held && !rsp.is_store) begin
      if (rsp.tag.to_const) begin
        cb_we = left != '0;
        done_w[cw] = cb_we;
      end else begin
        lw_en  = left;
        done_w = left & lw_ack;
      end
    end
    if (held && rsp.is_store) done_w = left;
    lw_tid  = rsp.tag.tid;
    lw_reg  = rsp.tag.dest[4:0];
    lw_data = rsp.rdata;
    cb_idx  = rsp.tag.dest[4:0];
    cb_data = rsp.rdata[cw];
    rel_en  = (held && !rsp.is_store && !rsp.tag.to_const) ? done_w : '0;
    rel_tid = rsp.tag.tid;
    rel_reg = rsp.tag.dest;
    dec_id  = rsp.tag.ebid;
    dec_ld  = (held && !rsp.is_store) ? 4'($countones(done_w)) : '0;
    dec_st  = (held &&  rsp.is_store) ? 4'($countones(done_w)) : '0;
    mem_rsp_ready = !held || (left & ~done_w) == '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held <= 1'b0; left <= '0; rsp <= '0;
    end else begin
      left <= left & ~done_w;
      if ((left & ~done_w) == '0) held <= 1'b0;
      if (mem_rsp_valid && mem_rsp_ready) begin
        held <= 1'b1;
        rsp  <= mem_rsp;
        left <= mem_rsp.wmask;
      end
    end
  end

  assign busy = (f_valid != '0) || (t_busy != '0) || held;
endmodule
