// tb_cgra_processor: runs a complete kernel on one CP.  Two CTAs of B
// threads are launched; the kernel (see dice_prog_pkg) loads parameters,
// waits on a barrier, loads a[] four threads per cycle, branches divergently
// on the data, reconverges and stores c[] two threads per cycle.  The memory
// model stalls for a while to force LDST credit stalls.  The result array is
// compared with the reference, and the CP's event counters must show every
// mechanism at work: metadata reuse, bitstream hits, a mispredicted
// speculative e-block, divergence and reconvergence, scoreboard and credit
// stalls, barrier waits, unrolled dispatch and TMCU coalescing.
module tb_cgra_processor;
  import dice_pkg::*;
  import dice_prog_pkg::*;

  localparam int B = 128;
  localparam int NCTA = 2;

  logic clk = 0, rst_n = 0, tmcu_enable = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic launch = 0, launch_ready, cta_done, idle;
  logic [2:0][15:0] launch_cta_id = '0, cta_done_id;
  logic [TID_W-1:0] launch_tbase = '0;
  logic mrq_v, mrq_r, mrs_v, mrs_r, stall = 0, stall_ls;
  mem_req_t mrq;
  mem_rsp_t mrs;
  cp_stats_t st;

  cgra_processor dut (
    .clk, .rst_n, .tmcu_enable, .launch, .launch_cta_id, .launch_kernel_id(8'd1),
    .launch_nthreads(10'(B)), .launch_tbase, .launch_md_base(MD_BASE), .launch_ready,
    .cta_done, .cta_done_id, .mem_req_valid(mrq_v), .mem_req_ready(mrq_r), .mem_req(mrq),
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

  int ndone = 0;
  always @(posedge clk) if (cta_done) ndone++;

  // Hold back data-side (LDST) requests twice: once at the first parameter
  // load (the barrier p-graph must wait for it) and once at the first data
  // load (the LDST FIFOs fill up and the branch p-graph meets pending
  // registers).  Instruction-side refills are never held.
  int seen_ld = 0, seen_par = 0;
  assign stall_ls = stall && mrq.tag.src == SRC_LDST;
  always @(posedge clk) begin
    seen_ld  <= int'(mrq_v && mrq.tag.src == SRC_LDST && !mrq.is_store && !mrq.tag.to_const);
    seen_par <= int'(mrq_v && mrq.tag.src == SRC_LDST && mrq.tag.to_const);
  end
  initial begin
    stall = 1;
    wait (seen_par > 0);
    wait (dut.fdr_st == 2'd3 && dut.fdr_md.barrier);   // barrier p-graph waiting
    repeat (30) @(posedge clk);
    stall = 0;
    wait (seen_ld > 0);
    stall = 1;
    wait (dut.fdr_st == 2'd3 && dut.fdr_pc == 16'd2);  // branch p-graph waiting
    repeat (30) @(posedge clk);
    stall = 0;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired: done=%0d eb=%0d ret=%0d grp=%0d cmds=%0d pc=%0d", ndone, st.eblocks, st.retired, st.groups, st.mem_cmds, st.bs_loads);
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
      launch_cta_id = '{default: 0};
      launch_cta_id[0] = 16'(c);
      launch_tbase = TID_W'(c * B);
      launch = 1;
      @(posedge clk);
      launch = 0;
    end
    t0 = $time;
    wait (ndone == NCTA);
    repeat (5) @(posedge clk);
    $display("kernel done in %0d cycles", ($time - t0) / 10);
    for (int g = 0; g < NCTA * B; g++)
      chk(u_mem.read_word(C_BASE + 32'(g * 4)) == c_val(g),
          $sformatf("c[%0d] = %0d, expected %0d", g, u_mem.read_word(C_BASE + 32'(g * 4)), c_val(g)));
    chk(idle, "CP idle at the end");
    $display("stats: eb=%0d ret=%0d mis=%0d reuse=%0d bsl=%0d bsh=%0d bar=%0d div=%0d rec=%0d grp=%0d unr=%0d sb=%0d cr=%0d cmds=%0d words=%0d",
      st.eblocks, st.retired, st.mispredict, st.md_reuse, st.bs_loads, st.bs_hits, st.barrier_wait,
      st.diverged, st.reconverged, st.groups, st.unrolled, st.stall_sb, st.stall_credit, st.mem_cmds, st.mem_words);
    chk(st.eblocks == st.retired, "every e-block retired");
    chk(st.mispredict > 0, "speculative e-block discarded");
    chk(st.md_reuse > 0, "metadata reused");
    chk(st.bs_hits > 0, "bitstream already resident");
    chk(st.bs_loads >= 6, "bitstreams loaded");
    chk(st.barrier_wait > 0, "barrier wait");
    chk(st.diverged == NCTA, "one divergence per CTA");
    chk(st.reconverged > 0, "reconvergence");
    chk(st.unrolled > 0, "unrolled dispatch");
    chk(st.stall_sb > 0, "scoreboard stall");
    chk(st.stall_credit > 0, "credit stall");
    chk(st.mem_words > st.mem_cmds, "TMCU coalescing");
    chk(st.ctas_done == NCTA, "CTAs finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
