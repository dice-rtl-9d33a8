// tb_active_thread_selection: checks the order and grouping of dispatched
// threads.  For random active masks and each unrolling mode (1 thread; 2
// threads K=16 apart; 4 threads K=8 apart) the expected group list is worked
// out here: bases T in ascending order with T mod (n*K) < K, lanes
// T, T+K, ... that are active, groups without an active thread skipped.
// With `advance` held high the unit must produce exactly one group per cycle,
// so the e-block's dispatch takes as many cycles as it has groups.
module tb_active_thread_selection;
  import dice_pkg::*;
  localparam int TH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic load = 0, advance = 0, valid, empty;
  logic [TH-1:0] mask = '0;
  logic [2:0] n_lanes = 3'd1;
  logic [4:0] k = 5'd1;
  logic [TID_W-1:0] base;
  logic [NT_MAX-1:0] lanes;

  active_thread_selection #(.THREADS(TH)) dut (.clk, .rst_n, .load, .mask, .n_lanes, .k,
    .advance, .valid, .base, .lanes, .empty);

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int nl [3] = '{1, 2, 4};
    int kk [3] = '{1, 16, 8};
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      int m;
      int exp_base[$], exp_lanes[$];
      int cyc;
      exp_base.delete(); exp_lanes.delete();
      m = it % 3;
      mask = {$urandom, $urandom};
      if (it % 7 == 0) mask = '1;
      if (it % 11 == 0) mask = TH'(1) << $urandom_range(0, TH - 1);
      for (int t = 0; t < TH; t++)
        if ((nl[m] == 1) || (t % (nl[m] * kk[m]) < kk[m])) begin
          int l;
          l = 0;
          for (int j = 0; j < nl[m]; j++)
            if (t + j * kk[m] < TH && mask[t + j * kk[m]]) l |= 1 << j;
          if (l != 0) begin exp_base.push_back(t); exp_lanes.push_back(l); end
        end
      n_lanes = 3'(nl[m]); k = 5'(kk[m]);
      load = 1; @(posedge clk); #1 load = 0;
      advance = 1; cyc = 0;
      while (valid) begin
        if (cyc < exp_base.size())
          chk(int'(base) == exp_base[cyc] && int'(lanes) == exp_lanes[cyc],
              $sformatf("group %0d: base %0d lanes %b, expected %0d %b", cyc, base, lanes, exp_base[cyc], 4'(exp_lanes[cyc])));
        @(posedge clk); #1; cyc++;
      end
      advance = 0;
      chk(cyc == exp_base.size(), $sformatf("one group per cycle: %0d cycles for %0d groups", cyc, exp_base.size()));
      chk(empty, "empty after the last group");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
