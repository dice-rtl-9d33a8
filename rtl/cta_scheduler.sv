// cta_scheduler: the CTA Scheduler of the CS stage.
//
// Among the schedulable CTAs it prefers one whose next PC equals the PC of
// the e-block it issued last, so metadata and bitstream can be reused; if
// none matches it picks round robin, starting after the CTA it granted last.
// Both rules follow the paper; how "recently dispatched" is remembered (the
// single last PC) is this design's choice.  `grant` is combinational when
// `ready` is high; `take` (the grant was used) updates the last PC and the
// round-robin pointer at the next edge.
module cta_scheduler
  import dice_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [CTA_SLOTS-1:0]           schedulable,
  input  logic [CTA_SLOTS-1:0][PC_W-1:0] sched_pc,
  input  logic                           ready,
  input  logic                           take,
  output logic                           grant_valid,
  output logic [CTA_W-1:0]               grant_slot,
  output logic                           grant_reuse
);
  logic [PC_W-1:0]  last_pc;
  logic             last_v;
  logic [CTA_W-1:0] rr;

  always_comb begin
    logic found;
    found       = 1'b0;
    grant_slot  = '0;
    grant_reuse = 1'b0;
    for (int s = 0; s < CTA_SLOTS; s++)
      if (!found && schedulable[s] && last_v && sched_pc[s] == last_pc) begin
        found = 1'b1; grant_slot = CTA_W'(s); grant_reuse = 1'b1;
      end
    for (int i = 1; i <= CTA_SLOTS; i++) begin
      automatic logic [CTA_W-1:0] s = CTA_W'(int'(rr) + i);
      if (!found && schedulable[s]) begin
        found = 1'b1; grant_slot = s;
      end
    end
    grant_valid = found && ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_pc <= '0; last_v <= 1'b0; rr <= CTA_W'(CTA_SLOTS - 1);
    end else if (take && grant_valid) begin
      last_pc <= sched_pc[grant_slot];
      last_v  <= 1'b1;
      rr      <= grant_slot;
    end
  end
endmodule
