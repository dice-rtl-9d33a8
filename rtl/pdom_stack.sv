// pdom_stack: the post-dominator (PDOM) reconvergence stack of one CTA.
//
// Each entry holds the next p-graph PC of a path, its reconvergence PC and
// the active thread mask of the threads on that path, as in the SIMT stacks
// of Fermi-class GPUs.  The top entry names the p-graph the CTA runs next and
// with which threads.  The Branch Handler drives three operations:
//   init     - one entry {pc, recov=none, mask} when the CTA is launched;
//   update   - set the top entry's next PC and push up to two divergent
//              paths (not-taken first, then taken, so the taken path runs
//              first);
//   pop      - remove the top entry (a thread group exits).
// Whenever the top entry's next PC equals its reconvergence PC the entry is
// popped automatically, one per cycle; `stable` is low while such a pop is
// due, so readers wait for it.  Paths that would start at their own
// reconvergence PC are not pushed (skipped computation).  Depth and the
// overflow assertion are this design's choices.
module pdom_stack
  import dice_pkg::*;
#(
  parameter int unsigned DEPTH   = 8,
  parameter int unsigned THREADS = MAX_THREADS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               init,
  input  logic [PC_W-1:0]    init_pc,
  input  logic [THREADS-1:0] init_mask,
  input  logic               update,
  input  logic [PC_W-1:0]    top_next,
  input  logic [1:0]         push_en,      // [0] = first push, [1] = second
  input  logic [1:0][PC_W-1:0]    push_pc,
  input  logic [PC_W-1:0]         push_recov,
  input  logic [1:0][THREADS-1:0] push_mask,
  input  logic               pop,
  output logic               empty,
  output logic               stable,
  output logic [PC_W-1:0]    top_pc,
  output logic [PC_W-1:0]    top_recov,
  output logic [THREADS-1:0] top_mask,
  output logic [$clog2(DEPTH):0] depth
);
  localparam logic [PC_W-1:0] NO_RECOV = '1;

  logic [PC_W-1:0]    next_pc [DEPTH];
  logic [PC_W-1:0]    recov_pc[DEPTH];
  logic [THREADS-1:0] mask    [DEPTH];
  logic [$clog2(DEPTH):0] sp;
  logic [$clog2(DEPTH)-1:0] ti;
  logic auto_pop;

  assign ti        = (sp == 0) ? '0 : $clog2(DEPTH)'(sp - 1);
  assign empty     = (sp == 0);
  assign depth     = sp;
  assign top_pc    = next_pc[ti];
  assign top_recov = recov_pc[ti];
  assign top_mask  = empty ? '0 : mask[ti];
  assign auto_pop  = !empty && next_pc[ti] == recov_pc[ti];
  assign stable    = !auto_pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp <= '0;
    end else if (init) begin
      next_pc[0]  <= init_pc;
      recov_pc[0] <= NO_RECOV;
      mask[0]     <= init_mask;
      sp          <= 1;
    end else if (update && !empty) begin
      automatic logic [$clog2(DEPTH):0] s = sp;
      next_pc[ti] <= top_next;
      for (int k = 0; k < 2; k++) begin
        if (push_en[k] && push_pc[k] != push_recov && push_mask[k] != '0) begin
          next_pc[s[$clog2(DEPTH)-1:0]]  <= push_pc[k];
          recov_pc[s[$clog2(DEPTH)-1:0]] <= push_recov;
          mask[s[$clog2(DEPTH)-1:0]]     <= push_mask[k];
          s = s + 1'b1;
        end
      end
      sp <= s;
    end else if (pop || auto_pop) begin
      if (!empty) sp <= sp - 1'b1;
    end
  end

  always_ff @(posedge clk) if (rst_n && update && !empty)
    assert (int'(sp) + int'(push_en[0]) + int'(push_en[1]) <= int'(DEPTH))
      else $error("pdom_stack: overflow");
endmodule
