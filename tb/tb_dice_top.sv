// tb_dice_top: end-to-end test of the full DICE top level at its default
// size (34 clusters of 4 CPs).  Four CTAs of 128 threads run the test kernel
// from dice_prog_pkg: two on cluster 0 / CP 0, one on cluster 0 / CP 1 and one
// on cluster 33 / CP 3, so requests and responses cross both interconnect
// levels.  Each CTA's done pulse must come from the CP it was launched on.
// The memory model holds back data-side requests twice (until a barrier wait
// has been seen, then until a scoreboard stall has been seen or a time limit
// expires) so that every named mechanism occurs.  The summed event counters
// are checked: each mechanism must have happened at least once, otherwise a
// failure is counted.  Results c[] are compared with the reference.
module tb_dice_top;
  import dice_pkg::*;
  import dice_prog_pkg::*;

  localparam int B = 128;
  localparam int NCTA = 4;

  logic clk = 0, rst_n = 0, tmcu_enable = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic launch = 0, launch_ready, idle;
  logic [5:0] launch_cluster = '0;
  logic [1:0] launch_cp = '0;
  logic [2:0][15:0] launch_cta_id = '0;
  logic [TID_W-1:0] launch_tbase = '0;
  logic [33:0][3:0] cta_done;
  logic [33:0][3:0][2:0][15:0] cta_done_id;
  logic mrq_v, mrq_r, mrs_v, mrs_r, stall = 0, stall_ls;
  mem_req_t mrq;
  mem_rsp_t mrs;
  cp_stats_t st;

  dice_top dut (
    .clk, .rst_n, .tmcu_enable, .launch, .launch_cluster, .launch_cp, .launch_cta_id,
    .launch_kernel_id(8'd1), .launch_nthreads(10'(B)), .launch_tbase,
    .launch_md_base(MD_BASE), .launch_ready, .cta_done, .cta_done_id,
    .mem_req_valid(mrq_v), .mem_req_ready(mrq_r), .mem_req(mrq),
    .mem_rsp_valid(mrs_v), .mem_rsp_ready(mrs_r), .mem_rsp(mrs), .idle, .stats(st)
  );
  mem_model #(.LATENCY(100)) u_mem (
    .clk, .stall(stall_ls), .req_valid(mrq_v), .req_ready(mrq_r), .req(mrq),
    .rsp_valid(mrs_v), .rsp_ready(mrs_r), .rsp(mrs)
  );

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // where each CTA runs
  int where_cl [NCTA] = '{0, 0, 0, 33};
  int where_cp [NCTA] = '{0, 0, 1, 3};
  int ndone = 0;
  always @(posedge clk)
    for (int cl = 0; cl < 34; cl++)
      for (int cp = 0; cp < 4; cp++)
        if (cta_done[cl][cp]) begin
          int id;
          id = int'(cta_done_id[cl][cp][0]);
          ndone++;
          chk(id < NCTA && where_cl[id] == cl && where_cp[id] == cp,
              $sformatf("CTA %0d finished on cluster %0d CP %0d", id, cl, cp));
        end

  int seen_ld = 0, seen_par = 0;
  assign stall_ls = stall && mrq.tag.src == SRC_LDST;
  always @(posedge clk) begin
    seen_ld  <= int'(mrq_v && mrq.tag.src == SRC_LDST && !mrq.is_store && !mrq.tag.to_const);
    seen_par <= int'(mrq_v && mrq.tag.src == SRC_LDST && mrq.tag.to_const);
  end
  initial begin
    stall = 1;
    wait (seen_par > 0);
    wait (st.barrier_wait > 20);
    stall = 0;
    wait (seen_ld > 0);
    stall = 1;
    fork
      wait (st.stall_sb > 10);
      repeat (4000) @(posedge clk);
    join_any
    disable fork;
    stall = 0;
  end

  initial begin
    #600000;
    failures++;
    $display("watchdog expired: done=%0d eb=%0d ret=%0d", ndone, st.eblocks, st.retired);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mw_q_t prog;
    longint t0;
    prog = build_kernel(B, NCTA * B);
    foreach (prog[i]) u_mem.write_word(prog[i].a, prog[i].d);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int c = 0; c < NCTA; c++) begin
      launch_cta_id    = '0;
      launch_cta_id[0] = 16'(c);
      launch_cluster   = 6'(where_cl[c]);
      launch_cp        = 2'(where_cp[c]);
      launch_tbase     = (c == 1) ? TID_W'(B) : '0;
      launch = 1;
      @(posedge clk);
      while (!launch_ready) @(posedge clk);
      launch = 0;
    end
    t0 = $time;
    wait (ndone == NCTA);
    repeat (5) @(posedge clk);
    $display("kernel done in %0d cycles", ($time - t0) / 10);
    for (int g = 0; g < NCTA * B; g++)
      chk(u_mem.read_word(C_BASE + 32'(g * 4)) == c_val(g),
          $sformatf("c[%0d] = %0d, expected %0d", g, u_mem.read_word(C_BASE + 32'(g * 4)), c_val(g)));
    chk(idle, "all CPs idle at the end");
    $display("stats: eb=%0d ret=%0d mis=%0d reuse=%0d bsl=%0d bsh=%0d bar=%0d div=%0d rec=%0d grp=%0d unr=%0d sb=%0d cr=%0d cmds=%0d words=%0d",
      st.eblocks, st.retired, st.mispredict, st.md_reuse, st.bs_loads, st.bs_hits, st.barrier_wait,
      st.diverged, st.reconverged, st.groups, st.unrolled, st.stall_sb, st.stall_credit, st.mem_cmds, st.mem_words);
    // every named mechanism must have happened
    chk(st.eblocks == st.retired, "every e-block retired (BRT)");
    chk(st.mispredict > 0, "branch misprediction recovery");
    chk(st.md_reuse > 0, "metadata reuse");
    chk(st.bs_hits > 0, "bitstream reuse from the double-buffered CM");
    chk(st.bs_loads > 0, "bitstream load");
    chk(st.barrier_wait > 0, "barrier wait");
    chk(st.diverged > 0, "divergence pushed on the PDOM stack");
    chk(st.reconverged > 0, "PDOM reconvergence");
    chk(st.unrolled > 0, "unrolled (multi-thread) dispatch");
    chk(st.stall_sb > 0, "scoreboard stall");
    chk(st.stall_credit > 0, "LDST credit stall");
    chk(st.mem_words > st.mem_cmds, "TMCU coalescing");
    chk(st.ctas_done == NCTA, "CTAs finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
