// tb_cta_scheduler: checks the CTA selection policy with a model.  Each cycle
// a random set of CTA slots is ready with random next p-graph numbers (from a
// small range, so matches are frequent).  Expected grant: the lowest ready
// slot whose next p-graph equals that of the last granted e-block (a reuse
// grant); otherwise the first ready slot after the last granted one, round
// robin; nothing while the FDR stage is not ready.  A grant is offered in the
// same cycle the inputs appear.
module tb_cta_scheduler;
  import dice_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [CTA_SLOTS-1:0] schedulable = '0;
  logic [CTA_SLOTS-1:0][PC_W-1:0] sched_pc = '0;
  logic ready = 0, take = 1, grant_valid, grant_reuse;
  logic [CTA_W-1:0] grant_slot;

  cta_scheduler dut (.clk, .rst_n, .schedulable, .sched_pc, .ready, .take,
                     .grant_valid, .grant_slot, .grant_reuse);

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin #500000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int last_pc = 0, rr = CTA_SLOTS - 1, n_reuse = 0, n_rr = 0;
    bit last_v = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      int e_slot;
      bit e_valid, e_reuse;
      schedulable = CTA_SLOTS'($urandom);
      for (int s = 0; s < CTA_SLOTS; s++) sched_pc[s] = PC_W'($urandom_range(0, 3));
      ready = ($urandom_range(0, 4) != 0);
      #1;
      e_valid = 0; e_reuse = 0; e_slot = 0;
      for (int s = 0; s < CTA_SLOTS; s++)
        if (!e_valid && schedulable[s] && last_v && int'(sched_pc[s]) == last_pc) begin
          e_valid = 1; e_reuse = 1; e_slot = s;
        end
      for (int i = 1; i <= CTA_SLOTS; i++)
        if (!e_valid && schedulable[(rr + i) % CTA_SLOTS]) begin
          e_valid = 1; e_slot = (rr + i) % CTA_SLOTS;
        end
      e_valid = e_valid && ready;
      chk(grant_valid == e_valid, "grant valid");
      if (e_valid) begin
        chk(int'(grant_slot) == e_slot && grant_reuse == e_reuse,
            $sformatf("slot %0d reuse %0d, expected %0d %0d", grant_slot, grant_reuse, e_slot, e_reuse));
        last_pc = int'(sched_pc[e_slot]); last_v = 1; rr = e_slot;
        if (e_reuse) n_reuse++; else n_rr++;
      end
      @(posedge clk); #1;
    end
    chk(n_reuse > 100 && n_rr > 100, $sformatf("reuse grants %0d, round-robin grants %0d", n_reuse, n_rr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
