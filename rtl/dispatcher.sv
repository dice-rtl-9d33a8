// dispatcher: the Dispatcher of the DE stage, with its Active Thread Selection
// Logic, Scoreboard, Register File, Operand Collector and control.
//
// For the e-block it is started with, it sends the active threads into the
// CGRA in ascending thread order, one group (1, 2 or 4 threads, by the
// p-graph's unrolling factor) per cycle, so a p-graph of latency p runs t
// threads in t + p cycles when nothing stalls.  Before a group goes it
// checks the three stall conditions of the paper: a thread's input or output
// register still awaits a load (scoreboard), an LDST port FIFO lacks credit
// for everything already in flight, or no group is left (idle).
//
// Timing of a group issued in cycle t: the register file is read in t, the
// operands (plus the thread id and CTA id pseudo-registers 32 and 33) enter
// the fabric in t+1, and results leave it in t+1+LAT.  The operand collector
// then writes CGRA results back to the register file (only registers in
// OUT_REGS, only when their predicate is set), turns load/store outputs into
// thread requests for the LDST ports (load destination from LD_DEST_REGS),
// reserves the scoreboard bits of loads, counts the requests for the Block
// Retire Table and records each thread's branch predicate.  When no group is
// left and nothing is in the fabric, `done` pulses and `taken` holds the
// branch outcome of every thread.
module dispatcher
  import dice_pkg::*;
#(
  parameter int unsigned THREADS    = MAX_THREADS,
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // e-block
  input  logic                       start,
  input  logic [EB_W-1:0]            s_ebid,
  input  logic [THREADS-1:0]         s_mask,
  input  pgraph_md_t                 s_md,
  input  logic [2:0]                 s_n_lanes,
  input  logic [4:0]                 s_k,
  input  logic [NUM_REGS-1:0]        s_check,
  input  logic [TID_W-1:0]           s_tbase,
  input  logic [15:0]                s_ctaid,
  output logic                       busy,
  output logic                       done,
  output logic [THREADS-1:0]         taken,
  // CGRA
  output logic [7:0]                 f_lat,
  output logic                       f_valid,
  output logic [TID_W-1:0]           f_base,
  output logic [NT_MAX-1:0]          f_lanes,
  output logic [NT_MAX-1:0][NUM_REGS+1:0][XLEN-1:0] f_regs,
  output logic [CONST_ENTRIES-1:0][XLEN-1:0] f_const,
  input  logic                       o_valid,
  input  logic [TID_W-1:0]           o_base,
  input  logic [NT_MAX-1:0]          o_lanes,
  input  fword_t    [N_FOUT-1:0]     o_port,
  input  fout_cfg_t [N_FOUT-1:0]     o_cfg,
  // LDST
  output logic        [N_LDPORTS-1:0] m_valid,
  output thread_req_t [N_LDPORTS-1:0] m_req,
  input  logic [N_LDPORTS-1:0][$clog2(FIFO_DEPTH):0] m_credit,
  input  logic [SECTOR_WORDS-1:0]              lw_en,
  input  logic [SECTOR_WORDS-1:0][TID_W-1:0]   lw_tid,
  input  logic [4:0]                           lw_reg,
  input  logic [SECTOR_WORDS-1:0][XLEN-1:0]    lw_data,
  output logic [SECTOR_WORDS-1:0]              lw_ack,
  input  logic                                 cb_we,
  input  logic [4:0]                           cb_idx,
  input  logic [XLEN-1:0]                      cb_data,
  input  logic [SECTOR_WORDS-1:0]              rel_en,
  input  logic [SECTOR_WORDS-1:0][TID_W-1:0]   rel_tid,
  input  logic [REG_W-1:0]                     rel_reg,
  // BRT
  output logic [2:0]                 inc_ld,
  output logic [2:0]                 inc_st,
  output logic [EB_W-1:0]            inc_id,
  // statistics
  output logic [31:0]                n_groups,
  output logic [31:0]                n_stall_sb,
  output logic [31:0]                n_stall_credit,
  output logic [31:0]                n_unrolled
);
  // ---------------------------------------------------------------- e-block
  logic                run;
  logic [EB_W-1:0]     ebid;
  pgraph_md_t          md;
  logic [4:0]          k;
  logic [NUM_REGS-1:0] check;
  logic [TID_W-1:0]    tbase;
  logic [15:0]         ctaid;
  logic [8:0]          inflight;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ebid <= '0; md <= '0; k <= 5'd1; check <= '0; tbase <= '0; ctaid <= '0;
    end else if (start) begin
      ebid <= s_ebid; md <= s_md; k <= s_k; check <= s_check; tbase <= s_tbase; ctaid <= s_ctaid;
    end
  end

  // ---------------------------------------------------------------- selection
  logic              g_valid, g_empty, issue, sb_coll, cr_stall;
  logic [TID_W-1:0]  g_base;
  logic [NT_MAX-1:0] g_lanes;
  logic [NT_MAX-1:0][TID_W-1:0] g_tid;

  active_thread_selection #(.THREADS(THREADS)) u_sel (
    .clk, .rst_n, .load(start), .mask(s_mask), .n_lanes(s_n_lanes), .k(s_k),
    .advance(issue), .valid(g_valid), .base(g_base), .lanes(g_lanes), .empty(g_empty)
  );

  always_comb begin
    for (int l = 0; l < NT_MAX; l++) g_tid[l] = g_base + TID_W'(l * int'(k));
    cr_stall = 1'b0;
    for (int p = 0; p < N_LDPORTS; p++)
      if (int'(m_credit[p]) <= int'(inflight) + 1) cr_stall = 1'b1;
  end

  // ---------------------------------------------------------------- scoreboard
  logic [N_LDPORTS-1:0]            rsv_en;
  logic [N_LDPORTS-1:0][TID_W-1:0] rsv_tid;
  logic [N_LDPORTS-1:0][REG_W-1:0] rsv_reg;
  logic                            sb_any;

  scoreboard #(.THREADS(THREADS)) u_sb (
    .clk, .rst_n, .chk_lane(g_lanes), .chk_tid(g_tid), .chk_regs(check), .collision(sb_coll),
    .rsv_en, .rsv_tid, .rsv_reg, .rel_en, .rel_tid, .rel_reg, .any_pending(sb_any)
  );

  assign issue = run && g_valid && !sb_coll && !cr_stall;

  // ---------------------------------------------------------------- register file
  logic [NT_MAX-1:0][NUM_REGS-1:0][XLEN-1:0] rd_data;
  logic [N_FOUT-1:0]            cw_en;
  logic [N_FOUT-1:0][TID_W-1:0] cw_tid;
  logic [N_FOUT-1:0][4:0]       cw_reg;
  logic [N_FOUT-1:0][XLEN-1:0]  cw_data;

  register_file #(.THREADS(THREADS)) u_rf (
    .clk, .rst_n,
    .rd_en(issue ? g_lanes : '0), .rd_tid(g_tid), .rd_regs(md.in_regs[NUM_REGS-1:0]), .rd_data,
    .cw_en, .cw_tid, .cw_reg, .cw_data,
    .lw_en, .lw_tid, .lw_reg, .lw_data, .lw_ack,
    .cb_we, .cb_idx, .cb_data, .cb_q(f_const)
  );

  // ---------------------------------------------------------------- to fabric
  logic                         d_valid;
  logic [TID_W-1:0]             d_base;
  logic [NT_MAX-1:0]            d_lanes;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin d_valid <= 1'b0; d_base <= '0; d_lanes <= '0; end
    else begin d_valid <= issue; d_base <= g_base; d_lanes <= issue ? g_lanes : '0; end
  end

  assign f_lat   = md.lat;
  assign f_valid = d_valid;
  assign f_base  = d_base;
  assign f_lanes = d_lanes;
  always_comb begin
    for (int l = 0; l < NT_MAX; l++) begin
      for (int r = 0; r < NUM_REGS; r++) f_regs[l][r] = rd_data[l][r];
      f_regs[l][NUM_REGS]     = XLEN'(d_base + TID_W'(l * int'(k)) - tbase);
      f_regs[l][NUM_REGS + 1] = XLEN'(ctaid);
    end
  end

  // ---------------------------------------------------------------- operand collector
  logic [N_LDPORTS-1:0] st_a_v, st_d_v;
  logic [N_LDPORTS-1:0][XLEN-1:0] st_a, st_d;
  logic [N_LDPORTS-1:0][TID_W-1:0] st_tid;
  logic [THREADS-1:0] br_set, br_val;

  always_comb begin
    cw_en = '0; cw_tid = '0; cw_reg = '0; cw_data = '0;
    m_valid = '0; m_req = '0; rsv_en = '0; rsv_tid = '0; rsv_reg = '0;
    st_a_v = '0; st_d_v = '0; st_a = '0; st_d = '0; st_tid = '0;
    br_set = '0; br_val = '0;
    for (int o = 0; o < N_FOUT; o++) begin
      automatic fout_cfg_t  c   = o_cfg[o];
      automatic logic [TID_W-1:0] tid = o_base + TID_W'(int'(c.lane) * int'(k));
      automatic logic [1:0] p   = c.idx[1:0];
      if (o_valid && o_lanes[c.lane] && o_port[o].ctrl) begin
        unique case (c.kind)
          FO_WB: if (c.idx < REG_W'(NUM_REGS) && md.out_regs[c.idx]) begin
            cw_en[o] = 1'b1; cw_tid[o] = tid; cw_reg[o] = c.idx[4:0]; cw_data[o] = o_port[o].data;
          end
          FO_LD: begin
            m_valid[p]        = 1'b1;
            m_req[p].is_store = 1'b0;
            m_req[p].addr     = o_port[o].data;
            m_req[p].tid      = tid;
            m_req[p].ebid     = ebid;
            m_req[p].dest     = md.ld_dest_regs[p];
            m_req[p].to_const = md.parameter_load;
            if (!md.parameter_load) begin
              rsv_en[p] = 1'b1; rsv_tid[p] = tid; rsv_reg[p] = md.ld_dest_regs[p];
            end
          end
          FO_ST_ADDR: begin st_a_v[p] = 1'b1; st_a[p] = o_port[o].data; st_tid[p] = tid; end
          FO_ST_DATA: begin st_d_v[p] = 1'b1; st_d[p] = o_port[o].data; end
          FO_BR: begin br_set[tid % THREADS] = 1'b1; br_val[tid % THREADS] = o_port[o].data[0]; end
          default: ;
        endcase
      end
    end
    for (int p = 0; p < N_LDPORTS; p++)
      if (st_a_v[p] && st_d_v[p] && !m_valid[p]) begin
        m_valid[p]        = 1'b1;
        m_req[p].is_store = 1'b1;
        m_req[p].addr     = st_a[p];
        m_req[p].data     = st_d[p];
        m_req[p].tid      = st_tid[p];
        m_req[p].ebid     = ebid;
        m_req[p].dest     = REG_NONE;
      end
    inc_ld = '0; inc_st = '0;
    for (int p = 0; p < N_LDPORTS; p++)
      if (m_valid[p]) begin
        if (m_req[p].is_store) inc_st = inc_st + 3'd1;
        else                   inc_ld = inc_ld + 3'd1;
      end
    inc_id = ebid;
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; inflight <= '0; done <= 1'b0; taken <= '0;
      n_groups <= '0; n_stall_sb <= '0; n_stall_credit <= '0; n_unrolled <= '0;
    end else begin
      done     <= 1'b0;
      inflight <= inflight + 9'(issue) - 9'(o_valid);
      taken    <= (taken & ~br_set) | (br_set & br_val);
      if (start) begin
        run   <= 1'b1;
        taken <= '0;
      end else if (run && !g_valid && inflight == 0 && !d_valid) begin
        run  <= 1'b0;
        done <= 1'b1;
      end
      if (issue) begin
        n_groups <= n_groups + 1;
        if ($countones(g_lanes) > 1) n_unrolled <= n_unrolled + 1;
      end
      if (run && g_valid && sb_coll)                n_stall_sb     <= n_stall_sb + 1;
      if (run && g_valid && !sb_coll && cr_stall)   n_stall_credit <= n_stall_credit + 1;
    end
  end

  assign busy = run;

  always_ff @(posedge clk) if (rst_n) assert (!(start && run))
    else $error("dispatcher: started while busy");
endmodule
