// cgra_processor: one CGRA Processor (CP), the core of DICE.
//
// A CP runs the CTAs the kernel driver assigns to it, one p-graph at a time
// per CTA, through four stages:
//   CS  - the CTA Scheduler picks a resident CTA from the Active CTA Table
//         (preferring one at the same p-graph as the last e-block) and forms
//         an e-block (CTA, p-graph PC);
//   FDR - the Metadata Fetch Unit reads the p-graph metadata from the
//         p-graph cache, the Decoder unpacks it, the Branch Handler predicts
//         the CTA's next p-graph (BTFNT) so the CTA can be scheduled again
//         speculatively, and Bitstream Fetch + Load makes the bitstream
//         resident in CM0 or CM1 without disturbing the running p-graph;
//   DE  - once the e-block is ready (decoded, bitstream loaded, the CTA's
//         older e-block resolved and checked against the PDOM stack, barrier
//         satisfied) the Dispatcher streams its active threads through the
//         CGRA with II=1; results go to the register file and the LDST unit;
//   RE  - the e-block waits in the Block Retire Table for its memory
//         requests while the CGRA already runs the next e-block.
// When DE finishes, the Branch Handler updates the CTA's PDOM stack from the
// threads' branch predicates.  A speculative e-block whose PC no longer
// matches the stack top is discarded.  A CTA whose stack is empty and whose
// e-blocks have all retired is finished and its table entry freed.
//
// One e-block is in FDR and one in DE at a time; a CTA has at most one
// speculative e-block beyond an unresolved one.  All memory traffic (p-graph
// cache refills and LDST sector commands) leaves on one memory port towards
// the cluster, responses are routed back by tag.  Stage structure, e-block
// flow, prediction, barriers, double-buffered CM and BRT follow the paper;
// the single FDR slot, the one-level speculation and the port arbitration
// are this design's choices.
//
// Lint note: rst_n is both the asynchronous reset of the flops and the
// enable of the clocked checking assertions in sub-blocks (checks are
// skipped while in reset); the resulting mixed-use warning on rst_n is
// harmless and stands.
module cgra_processor
  import dice_pkg::*;
#(
  parameter int unsigned THREADS    = MAX_THREADS,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned PGC_LINES  = 128
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 tmcu_enable,
  // CTA launch from the kernel driver
  input  logic                 launch,
  input  logic [2:0][15:0]     launch_cta_id,
  input  logic [7:0]           launch_kernel_id,
  input  logic [TID_W:0]       launch_nthreads,
  input  logic [TID_W-1:0]     launch_tbase,
  input  logic [31:0]          launch_md_base,
  output logic                 launch_ready,
  output logic                 cta_done,
  output logic [2:0][15:0]     cta_done_id,
  // memory port
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_rsp_valid,
  output logic                 mem_rsp_ready,
  input  mem_rsp_t             mem_rsp,
  output logic                 idle,
  output cp_stats_t            stats
);
  // ================================================================ CS
  logic [CTA_SLOTS-1:0]           t_valid, t_sched;
  logic [CTA_SLOTS-1:0][PC_W-1:0] t_pc;
  logic [CTA_SLOTS-1:0][2:0][15:0] t_ctaid;
  logic [CTA_SLOTS-1:0][7:0]      t_kid;
  logic [CTA_SLOTS-1:0][TID_W:0]  t_nthr;
  logic [CTA_SLOTS-1:0][TID_W-1:0] t_tbase;
  logic [CTA_SLOTS-1:0][31:0]     t_mdb;
  logic                 t_full;
  logic [CTA_W-1:0]     t_lslot;
  logic                 set_sched, clr_sched, free;
  logic [CTA_W-1:0]     set_slot, clr_slot, free_slot;
  logic [PC_W-1:0]      set_pc;
  logic [CTA_SLOTS-1:0] resync;

  active_cta_table u_act (
    .clk, .rst_n, .launch, .launch_cta_id, .launch_kernel_id, .launch_nthreads,
    .launch_tbase, .launch_md_base, .full(t_full), .launch_slot(t_lslot),
    .set_sched, .set_slot, .set_pc, .clr_sched, .clr_slot, .free, .free_slot,
    .valid(t_valid), .schedulable(t_sched), .sched_pc(t_pc), .cta_id(t_ctaid),
    .kernel_id(t_kid), .nthreads(t_nthr), .tbase(t_tbase), .md_base(t_mdb)
  );
  assign launch_ready = !t_full;

  // PDOM stacks, one per CTA slot
  logic [CTA_SLOTS-1:0]              p_empty, p_stable, p_init, p_upd, p_pop;
  logic [CTA_SLOTS-1:0][PC_W-1:0]    p_top;
  logic [CTA_SLOTS-1:0][THREADS-1:0] p_mask;
  logic [PC_W-1:0]                   bh_next, bh_recov;
  logic [1:0]                        bh_push;
  logic [1:0][PC_W-1:0]              bh_push_pc;
  logic [1:0][THREADS-1:0]           bh_push_mask;
  logic [THREADS-1:0]                init_mask;

  always_comb begin
    init_mask = '0;
    for (int t = 0; t < THREADS; t++)
      init_mask[t] = (t >= int'(launch_tbase)) && (t < int'(launch_tbase) + int'(launch_nthreads));
  end

  for (genvar c = 0; c < CTA_SLOTS; c++) begin : g_pdom
    logic [PC_W-1:0] unused_recov;
    logic [$clog2(8):0] unused_depth;
    assign p_init[c] = launch && !t_full && t_lslot == CTA_W'(c);
    pdom_stack #(.DEPTH(8), .THREADS(THREADS)) u_pdom (
      .clk, .rst_n, .init(p_init[c]), .init_pc('0), .init_mask,
      .update(p_upd[c]), .top_next(bh_next), .push_en(bh_push), .push_pc(bh_push_pc),
      .push_recov(bh_recov), .push_mask(bh_push_mask), .pop(p_pop[c]),
      .empty(p_empty[c]), .stable(p_stable[c]), .top_pc(p_top[c]), .top_recov(unused_recov),
      .top_mask(p_mask[c]), .depth(unused_depth)
    );
  end

  typedef enum logic [1:0] { F_IDLE, F_MD, F_BS, F_WAIT } fdr_e;
  fdr_e              fdr_st;
  logic              cs_grant, cs_reuse;
  logic [CTA_W-1:0]  cs_slot;

  cta_scheduler u_cs (
    .clk, .rst_n, .schedulable(t_sched & t_valid & ~resync), .sched_pc(t_pc),
    .ready(fdr_st == F_IDLE), .take(1'b1),
    .grant_valid(cs_grant), .grant_slot(cs_slot), .grant_reuse(cs_reuse)
  );

  // ================================================================ FDR
  logic [CTA_W-1:0]    fdr_cta;
  logic [PC_W-1:0]     fdr_pc, fdr_pred_pc;
  logic                fdr_spec, fdr_pred_v, fdr_bank;
  pgraph_md_t          fdr_md, dec_md;
  logic [2:0]          fdr_nl, dec_nl;
  logic [4:0]          fdr_k, dec_k;
  logic [NUM_REGS-1:0] fdr_chk, dec_chk;
  logic [N_LDPORTS-1:0] dec_ldu;

  // DE state
  logic               de_v, de_bank;
  logic [CTA_W-1:0]   de_cta;
  logic [PC_W-1:0]    de_pc;
  pgraph_md_t         de_md;
  logic [THREADS-1:0] de_mask;
  logic [EB_W-1:0]    de_ebid;

  // p-graph cache
  logic [1:0]       pc_req, pc_rsp;
  logic [1:0][31:0] pc_addr;
  logic [31:0]      pc_data;
  logic             ic_mreq_v, ic_mreq_rdy, ic_mrsp_v;
  mem_req_t         ic_mreq;

  pgraph_cache #(.LINES(PGC_LINES)) u_pgc (
    .clk, .rst_n, .req(pc_req), .addr(pc_addr), .rsp(pc_rsp), .rdata(pc_data),
    .mem_req_valid(ic_mreq_v), .mem_req_ready(ic_mreq_rdy), .mem_req(ic_mreq),
    .mem_rsp_valid(ic_mrsp_v), .mem_rsp(mem_rsp)
  );

  logic                       mfu_done, mfu_reused;
  logic [MD_WORDS-1:0][31:0]  mfu_words;
  metadata_fetch_unit u_mfu (
    .clk, .rst_n, .req(fdr_st == F_MD), .md_addr(t_mdb[fdr_cta] + {fdr_pc, 5'd0}),
    .done(mfu_done), .reused(mfu_reused), .words(mfu_words),
    .c_req(pc_req[0]), .c_addr(pc_addr[0]), .c_rsp(pc_rsp[0]), .c_data(pc_data)
  );

  metadata_decoder u_dec (
    .words(mfu_words), .md(dec_md), .n_lanes(dec_nl), .k(dec_k), .ld_used(dec_ldu),
    .check_regs(dec_chk)
  );

  logic bh_pred_v;
  logic [PC_W-1:0] bh_pred_pc;
  logic de_done_w;
  logic [THREADS-1:0] de_taken;
  logic bh_upd, bh_pop, bh_div;

  branch_handler #(.THREADS(THREADS)) u_bh (
    .pc(fdr_pc), .br(dec_md.branch), .pred_valid(bh_pred_v), .pred_pc(bh_pred_pc),
    .resolve(de_done_w), .r_pc(de_pc), .r_br(de_md.branch), .r_mask(de_mask), .r_taken(de_taken),
    .upd(bh_upd), .upd_next(bh_next), .upd_push(bh_push), .upd_push_pc(bh_push_pc),
    .upd_recov(bh_recov), .upd_push_mask(bh_push_mask), .pop(bh_pop), .diverged(bh_div)
  );

  // configuration memory and bitstream loader
  logic             bs_done, bs_bank, bs_loaded, cm_start, cm_bank, cm_we, cm_ldone;
  logic [31:0]      cm_addr, cm_wdata;
  logic [$clog2(CFG_WORDS)-1:0] cm_idx;
  logic [1:0]       cm_valid;
  logic [1:0][31:0] cm_baddr;
  cgra_cfg_t        cfg;

  bitstream_fetch_load u_bfl (
    .clk, .rst_n, .req(fdr_st == F_BS), .addr(fdr_md.bitstream_addr),
    .length(fdr_md.bitstream_length), .busy(1'b1), .busy_bank(de_bank),
    .done(bs_done), .done_bank(bs_bank), .loaded(bs_loaded),
    .bank_valid(cm_valid), .bank_addr(cm_baddr), .ld_start(cm_start), .ld_bank(cm_bank),
    .ld_addr(cm_addr), .wr_en(cm_we), .wr_idx(cm_idx), .wr_data(cm_wdata), .ld_done(cm_ldone),
    .c_req(pc_req[1]), .c_addr(pc_addr[1]), .c_rsp(pc_rsp[1]), .c_data(pc_data)
  );

  config_memory u_cm (
    .clk, .rst_n, .active(de_bank), .ld_start(cm_start), .ld_bank(cm_bank), .ld_addr(cm_addr),
    .wr_en(cm_we), .wr_idx(cm_idx), .wr_data(cm_wdata), .ld_done(cm_ldone),
    .bank_valid(cm_valid), .bank_addr(cm_baddr), .cfg
  );

  // ================================================================ RE (BRT)
  logic             brt_full, brt_ret;
  logic [EB_W-1:0]  brt_id, brt_ret_id, inc_id, dec_id;
  logic [CTA_W-1:0] brt_ret_cta;
  logic [CTA_SLOTS-1:0] cta_busy;
  logic [2:0]       inc_ld, inc_st;
  logic [3:0]       dec_ld, dec_st;
  logic             de_enter;
  logic [BRT_ENTRIES-1:0][15:0] unused_pl, unused_ps;

  block_retire_table u_brt (
    .clk, .rst_n, .alloc(de_enter), .alloc_cta(fdr_cta), .full(brt_full), .alloc_id(brt_id),
    .inc_ld, .inc_st, .inc_id, .dec_ld, .dec_st, .dec_id,
    .de_done(de_done_w), .de_done_id(de_ebid), .ret(brt_ret), .ret_id(brt_ret_id),
    .ret_cta(brt_ret_cta), .cta_busy, .pend_ld(unused_pl), .pend_st(unused_ps)
  );

  // FDR -> DE readiness
  logic ready_de, same_cta_de, mismatch;
  assign same_cta_de = de_v && de_cta == fdr_cta;
  assign mismatch    = p_empty[fdr_cta] || p_top[fdr_cta] != fdr_pc;
  assign ready_de    = fdr_st == F_WAIT && !de_v && !brt_full && !same_cta_de &&
                       p_stable[fdr_cta] && !(fdr_md.barrier && cta_busy[fdr_cta]);
  assign de_enter    = ready_de && !mismatch;

  // ================================================================ DE
  logic [7:0]                  f_lat;
  logic                        f_valid, o_valid;
  logic [TID_W-1:0]            f_base, o_base;
  logic [NT_MAX-1:0]           f_lanes, o_lanes;
  logic [NT_MAX-1:0][NUM_REGS+1:0][XLEN-1:0] f_regs;
  logic [CONST_ENTRIES-1:0][XLEN-1:0] f_const;
  fword_t    [N_FOUT-1:0]      o_port;
  fout_cfg_t [N_FOUT-1:0]      o_cfg;
  logic        [N_LDPORTS-1:0] m_valid;
  thread_req_t [N_LDPORTS-1:0] m_req;
  logic [N_LDPORTS-1:0][$clog2(FIFO_DEPTH):0] m_credit;
  logic [SECTOR_WORDS-1:0]             lw_en, lw_ack, rel_en;
  logic [SECTOR_WORDS-1:0][TID_W-1:0]  lw_tid, rel_tid;
  logic [4:0]                          lw_reg, cb_idx;
  logic [SECTOR_WORDS-1:0][XLEN-1:0]   lw_data;
  logic                                cb_we, d_busy, l_busy;
  logic [XLEN-1:0]                     cb_data;
  logic [REG_W-1:0]                    rel_reg;

  dispatcher #(.THREADS(THREADS), .FIFO_DEPTH(FIFO_DEPTH)) u_disp (
    .clk, .rst_n, .start(de_enter), .s_ebid(brt_id), .s_mask(p_mask[fdr_cta]), .s_md(fdr_md),
    .s_n_lanes(fdr_nl), .s_k(fdr_k), .s_check(fdr_chk), .s_tbase(t_tbase[fdr_cta]),
    .s_ctaid(t_ctaid[fdr_cta][0]), .busy(d_busy), .done(de_done_w), .taken(de_taken),
    .f_lat, .f_valid, .f_base, .f_lanes, .f_regs, .f_const,
    .o_valid, .o_base, .o_lanes, .o_port, .o_cfg,
    .m_valid, .m_req, .m_credit, .lw_en, .lw_tid, .lw_reg, .lw_data, .lw_ack,
    .cb_we, .cb_idx, .cb_data, .rel_en, .rel_tid, .rel_reg,
    .inc_ld, .inc_st, .inc_id,
    .n_groups(stats.groups), .n_stall_sb(stats.stall_sb), .n_stall_credit(stats.stall_credit),
    .n_unrolled(stats.unrolled)
  );

  cgra_fabric u_cgra (
    .clk, .rst_n, .cfg, .lat(f_lat), .in_valid(f_valid), .in_base_tid(f_base),
    .in_lane_mask(f_lanes), .in_regs(f_regs), .const_buf(f_const),
    .out_valid(o_valid), .out_base_tid(o_base), .out_lane_mask(o_lanes),
    .out_port(o_port), .out_cfg(o_cfg)
  );

  logic     ls_mreq_v, ls_mreq_rdy, ls_mrsp_v, ls_mrsp_rdy;
  mem_req_t ls_mreq;

  ldst_unit #(.N_PORTS(N_LDPORTS), .FIFO_DEPTH(FIFO_DEPTH)) u_ldst (
    .clk, .rst_n, .tmcu_enable, .req_valid(m_valid), .req(m_req), .credit(m_credit), .busy(l_busy),
    .mem_req_valid(ls_mreq_v), .mem_req_ready(ls_mreq_rdy), .mem_req(ls_mreq),
    .mem_rsp_valid(ls_mrsp_v), .mem_rsp_ready(ls_mrsp_rdy), .mem_rsp,
    .lw_en, .lw_tid, .lw_reg, .lw_data, .lw_ack, .cb_we, .cb_idx, .cb_data,
    .rel_en, .rel_tid, .rel_reg, .dec_ld, .dec_st, .dec_id,
    .n_cmds(stats.mem_cmds), .n_words(stats.mem_words)
  );

  // memory port: p-graph cache refills first, then LDST commands
  assign mem_req_valid = ic_mreq_v || ls_mreq_v;
  assign mem_req       = ic_mreq_v ? ic_mreq : ls_mreq;
  assign ic_mreq_rdy   = mem_req_ready;
  assign ls_mreq_rdy   = mem_req_ready && !ic_mreq_v;
  assign ic_mrsp_v     = mem_rsp_valid && mem_rsp.tag.src == SRC_ICACHE;
  assign ls_mrsp_v     = mem_rsp_valid && mem_rsp.tag.src == SRC_LDST;
  assign mem_rsp_ready = (mem_rsp.tag.src == SRC_ICACHE) ? 1'b1 : ls_mrsp_rdy;

  // ================================================================ control
  logic [CTA_SLOTS-1:0] fin;
  logic                 fin_any, fdr_set;
  logic [CTA_W-1:0]     fin_slot, rs_slot;
  logic                 rs_any;

  always_comb begin
    // scheduling state writes: FDR events first, then one resync per cycle
    fdr_set = 1'b0; set_sched = 1'b0; set_slot = fdr_cta; set_pc = '0;
    if (fdr_st == F_MD && mfu_done && !fdr_spec && bh_pred_v) begin
      fdr_set = 1'b1; set_pc = bh_pred_pc;
    end else if (de_enter && fdr_spec && fdr_pred_v) begin
      fdr_set = 1'b1; set_pc = fdr_pred_pc;
    end else if (ready_de && mismatch && !p_empty[fdr_cta]) begin
      fdr_set = 1'b1; set_pc = p_top[fdr_cta];
    end
    rs_any = 1'b0; rs_slot = '0;
    for (int c = CTA_SLOTS - 1; c >= 0; c--)
      if (resync[c] && p_stable[c] && !(fdr_st != F_IDLE && fdr_cta == CTA_W'(c))) begin
        rs_any = 1'b1; rs_slot = CTA_W'(c);
      end
    if (fdr_set) set_sched = 1'b1;
    else if (rs_any && !p_empty[rs_slot]) begin
      set_sched = 1'b1; set_slot = rs_slot; set_pc = p_top[rs_slot];
    end
    clr_sched = cs_grant;
    clr_slot  = cs_slot;
    // PDOM update on resolution
    p_upd = '0; p_pop = '0;
    if (de_done_w) begin
      p_upd[de_cta] = bh_upd;
      p_pop[de_cta] = bh_pop;
    end
    // finished CTAs
    fin_any = 1'b0; fin_slot = '0;
    for (int c = CTA_SLOTS - 1; c >= 0; c--) begin
      fin[c] = t_valid[c] && p_empty[c] && !cta_busy[c] && !resync[c] &&
               !(fdr_st != F_IDLE && fdr_cta == CTA_W'(c)) && !(de_v && de_cta == CTA_W'(c));
      if (fin[c]) begin fin_any = 1'b1; fin_slot = CTA_W'(c); end
    end
    free      = fin_any;
    free_slot = fin_slot;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fdr_st <= F_IDLE; fdr_cta <= '0; fdr_pc <= '0; fdr_spec <= 1'b0; fdr_bank <= 1'b0;
      fdr_pred_v <= 1'b0; fdr_pred_pc <= '0; fdr_md <= '0; fdr_nl <= 3'd1; fdr_k <= 5'd1;
      fdr_chk <= '0;
      de_v <= 1'b0; de_bank <= 1'b0; de_cta <= '0; de_pc <= '0; de_md <= '0; de_mask <= '0;
      de_ebid <= '0; resync <= '0;
      cta_done <= 1'b0; cta_done_id <= '0;
      stats.eblocks <= '0; stats.retired <= '0; stats.mispredict <= '0; stats.md_reuse <= '0;
      stats.bs_loads <= '0; stats.bs_hits <= '0; stats.barrier_wait <= '0;
      stats.diverged <= '0; stats.reconverged <= '0; stats.ctas_done <= '0;
    end else begin
      cta_done <= 1'b0;
      unique case (fdr_st)
        F_IDLE: if (cs_grant) begin
          fdr_st   <= F_MD;
          fdr_cta  <= cs_slot;
          fdr_pc   <= t_pc[cs_slot];
          fdr_spec <= de_v && de_cta == cs_slot;
        end
        F_MD: if (mfu_done) begin
          fdr_md <= dec_md; fdr_nl <= dec_nl; fdr_k <= dec_k; fdr_chk <= dec_chk;
          fdr_pred_v <= bh_pred_v; fdr_pred_pc <= bh_pred_pc;
          fdr_st <= F_BS;
          if (mfu_reused) stats.md_reuse <= stats.md_reuse + 1;
        end
        F_BS: if (bs_done) begin
          fdr_bank <= bs_bank;
          fdr_st   <= F_WAIT;
          if (bs_loaded) stats.bs_loads <= stats.bs_loads + 1;
          else           stats.bs_hits  <= stats.bs_hits + 1;
        end
        F_WAIT: begin
          if (fdr_md.barrier && cta_busy[fdr_cta] && !same_cta_de)
            stats.barrier_wait <= stats.barrier_wait + 1;
          if (ready_de) begin
            fdr_st <= F_IDLE;
            if (mismatch) stats.mispredict <= stats.mispredict + 1;
          end
        end
        default: fdr_st <= F_IDLE;
      endcase

      if (de_enter) begin
        de_v <= 1'b1; de_bank <= fdr_bank; de_cta <= fdr_cta; de_pc <= fdr_pc;
        de_md <= fdr_md; de_mask <= p_mask[fdr_cta]; de_ebid <= brt_id;
        stats.eblocks <= stats.eblocks + 1;
      end else if (de_done_w) begin
        de_v <= 1'b0;
        if (bh_div) stats.diverged <= stats.diverged + 1;
        // resynchronise the CTA's schedule unless an e-block of it waits in FDR
        if (!(fdr_st != F_IDLE && fdr_cta == de_cta)) resync[de_cta] <= 1'b1;
      end
      if (!fdr_set && rs_any) resync[rs_slot] <= 1'b0;
      if (brt_ret) stats.retired <= stats.retired + 1;
      if (free) begin
        cta_done    <= 1'b1;
        cta_done_id <= t_ctaid[free_slot];
        stats.ctas_done <= stats.ctas_done + 1;
      end
      for (int c = 0; c < CTA_SLOTS; c++)
        if (!p_stable[c] || p_pop[c]) stats.reconverged <= stats.reconverged + 1;
    end
  end

  assign idle = (t_valid == '0) && fdr_st == F_IDLE && !de_v && !l_busy && !d_busy;
endmodule
