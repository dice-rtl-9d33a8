// tb_pdom_stack: checks the reconvergence stack against a queue model.
// Random operations (initialise, update with zero to two pushes, explicit
// pop) are applied one per cycle, with pushes kept within the depth.  After
// every edge the model applies the same rules as the hardware: an update
// rewrites the top's next pc and pushes the entries whose pc differs from the
// reconvergence pc and whose mask is not empty; with no other operation, a
// top whose next pc equals its reconvergence pc is popped (and `stable` is
// low while that pop is due).  Top pc, mask, depth, empty and stable are
// compared every cycle.
module tb_pdom_stack;
  import dice_pkg::*;
  localparam int DEPTH = 8, TH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init = 0, update = 0, pop = 0;
  logic [PC_W-1:0] init_pc = '0, top_next = '0, push_recov = '0;
  logic [TH-1:0] init_mask = '0;
  logic [1:0] push_en = '0;
  logic [1:0][PC_W-1:0] push_pc = '0;
  logic [1:0][TH-1:0] push_mask = '0;
  logic empty, stable;
  logic [PC_W-1:0] top_pc, top_recov;
  logic [TH-1:0] top_mask;
  logic [$clog2(DEPTH):0] depth;

  pdom_stack #(.DEPTH(DEPTH), .THREADS(TH)) dut (.clk, .rst_n, .init, .init_pc, .init_mask,
    .update, .top_next, .push_en, .push_pc, .push_recov, .push_mask, .pop,
    .empty, .stable, .top_pc, .top_recov, .top_mask, .depth);

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { logic [PC_W-1:0] pc, rc; logic [TH-1:0] m; } ent_t;
  ent_t st[$];

  initial begin #500000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int n_push = 0, n_auto = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int r;
      bit autop;
      // compare the visible state
      #1;
      chk(empty == (st.size() == 0), "empty");
      chk(int'(depth) == st.size(), $sformatf("depth %0d vs %0d", depth, st.size()));
      autop = st.size() > 0 && st[$].pc == st[$].rc;
      chk(stable == !autop, "stable");
      if (st.size() > 0) begin
        chk(top_pc == st[$].pc && top_mask == st[$].m && top_recov == st[$].rc, "top entry");
      end
      // choose an operation
      init = 0; update = 0; pop = 0; push_en = '0;
      r = $urandom_range(0, 99);
      if (st.size() == 0 || r < 3) begin
        init = 1; init_pc = PC_W'($urandom_range(0, 7)); init_mask = TH'($urandom);
      end else if (r < 70) begin
        update = 1;
        top_next = PC_W'($urandom_range(0, 7));
        push_recov = PC_W'($urandom_range(0, 7));
        for (int k = 0; k < 2; k++) begin
          push_en[k] = (st.size() + 2 <= DEPTH) && ($urandom_range(0, 1) == 1);
          push_pc[k] = PC_W'($urandom_range(0, 7));
          push_mask[k] = ($urandom_range(0, 5) == 0) ? '0 : TH'($urandom);
        end
      end else if (r < 85) begin
        pop = 1;
      end
      @(posedge clk);
      // model
      if (init) begin
        st.delete(); st.push_back('{init_pc, '1, init_mask});
      end else if (update) begin
        st[$].pc = top_next;
        for (int k = 0; k < 2; k++)
          if (push_en[k] && push_pc[k] != push_recov && push_mask[k] != '0) begin
            st.push_back('{push_pc[k], push_recov, push_mask[k]}); n_push++;
          end
      end else if (pop || autop) begin
        if (!pop) n_auto++;
        void'(st.pop_back());
      end
    end
    chk(n_push > 100 && n_auto > 20, $sformatf("pushes %0d and automatic pops %0d happened", n_push, n_auto));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
