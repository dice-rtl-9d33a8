// scoreboard: the Scoreboard of the dispatcher.
//
// One pending bit per (thread, register).  A bit is reserved when a load
// whose destination is that register of that thread leaves the CGRA, and
// released when the load's data is written into the register file.  Before a
// group of threads is dispatched the dispatcher asks whether any of the
// p-graph's input or output registers of any thread in the group is pending
// (collision check); if so the dispatch stalls.  Up to N_LDPORTS reserves and
// SECTOR_WORDS releases are accepted per cycle.  The check is combinational;
// reserve and release take effect at the next edge (a release wins over a
// reserve of the same bit in the same cycle).  The paper places reservation
// and release as drawn in the dispatcher figure; reserving when the load
// leaves the fabric rather than at dispatch is this design's choice.
module scoreboard
  import dice_pkg::*;
#(
  parameter int unsigned THREADS = MAX_THREADS
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // collision check for a dispatch group
  input  logic [NT_MAX-1:0]                    chk_lane,
  input  logic [NT_MAX-1:0][TID_W-1:0]         chk_tid,
  input  logic [NUM_REGS-1:0]                  chk_regs,
  output logic                                 collision,
  // reserve
  input  logic [N_LDPORTS-1:0]                 rsv_en,
  input  logic [N_LDPORTS-1:0][TID_W-1:0]      rsv_tid,
  input  logic [N_LDPORTS-1:0][REG_W-1:0]      rsv_reg,
  // release
  input  logic [SECTOR_WORDS-1:0]              rel_en,
  input  logic [SECTOR_WORDS-1:0][TID_W-1:0]   rel_tid,
  input  logic [REG_W-1:0]                     rel_reg,
  output logic                                 any_pending
);
  logic [NUM_REGS-1:0] pend [THREADS];
  logic [THREADS-1:0]  thr_any;

  always_comb begin
    collision = 1'b0;
    for (int l = 0; l < NT_MAX; l++)
      if (chk_lane[l] && (pend[chk_tid[l] % THREADS] & chk_regs) != '0) collision = 1'b1;
    for (int t = 0; t < THREADS; t++) thr_any[t] = pend[t] != '0;
    any_pending = thr_any != '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < THREADS; t++) pend[t] <= '0;
    end else begin
      for (int p = 0; p < N_LDPORTS; p++)
        if (rsv_en[p] && rsv_reg[p] < REG_W'(NUM_REGS))
          pend[rsv_tid[p] % THREADS][rsv_reg[p][4:0]] <= 1'b1;
      for (int w = 0; w < SECTOR_WORDS; w++)
        if (rel_en[w] && rel_reg < REG_W'(NUM_REGS))
          pend[rel_tid[w] % THREADS][rel_reg[4:0]] <= 1'b0;
    end
  end
endmodule
