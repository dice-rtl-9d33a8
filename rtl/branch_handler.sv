// branch_handler: the Branch Handler of the FDR stage.
//
// Prediction: from the BRANCH_* metadata of a decoded p-graph it names the
// p-graph the CTA will most likely run next, with the backward-taken,
// forward-not-taken (BTFNT) rule: a jump goes to its target, a conditional
// branch is predicted taken only if its target is not after it, otherwise the
// next p-graph in order; a kernel exit has no successor.  This lets the CS and
// FDR stages work on the CTA's next e-block before the current one resolves.
//
// Resolution: once every thread of an e-block has produced its branch
// predicate, it turns the e-block's active mask and taken mask into one PDOM
// stack operation: a uniform outcome just sets the top entry's next PC; a
// divergent branch sets the top entry to the reconvergence PC and pushes the
// not-taken and taken paths; an exit pops the top entry.  Purely
// combinational.  BTFNT and the PDOM use follow the paper; the BRANCH_* bit
// layout (kind, target, reconvergence PC) is this design's.
module branch_handler
  import dice_pkg::*;
#(
  parameter int unsigned THREADS = MAX_THREADS
) (
  // prediction
  input  logic [PC_W-1:0]      pc,
  input  branch_md_t           br,
  output logic                 pred_valid,
  output logic [PC_W-1:0]      pred_pc,
  // resolution
  input  logic                 resolve,
  input  logic [PC_W-1:0]      r_pc,
  input  branch_md_t           r_br,
  input  logic [THREADS-1:0]   r_mask,
  input  logic [THREADS-1:0]   r_taken,
  output logic                 upd,
  output logic [PC_W-1:0]      upd_next,
  output logic [1:0]           upd_push,
  output logic [1:0][PC_W-1:0] upd_push_pc,
  output logic [PC_W-1:0]      upd_recov,
  output logic [1:0][THREADS-1:0] upd_push_mask,
  output logic                 pop,
  output logic                 diverged
);
  logic [PC_W-1:0] tgt, rtgt, rrec;
  logic [THREADS-1:0] t, nt;

  assign tgt = PC_W'(br.target);
  always_comb begin
    pred_valid = 1'b1;
    unique case (br.kind)
      BR_NEXT: pred_pc = pc + 1'b1;
      BR_JUMP: pred_pc = tgt;
      BR_COND: pred_pc = (tgt <= pc) ? tgt : pc + 1'b1;   // BTFNT
      default: begin pred_pc = pc + 1'b1; pred_valid = 1'b0; end
    endcase
  end

  assign rtgt = PC_W'(r_br.target);
  assign rrec = PC_W'(r_br.reconv);
  assign t    = r_mask & r_taken;
  assign nt   = r_mask & ~r_taken;

  always_comb begin
    upd = 1'b0; pop = 1'b0; diverged = 1'b0;
    upd_next = r_pc + 1'b1; upd_push = '0; upd_recov = rrec;
    upd_push_pc = '0; upd_push_mask = '0;
    if (resolve) begin
      unique case (r_br.kind)
        BR_NEXT: upd = 1'b1;
        BR_JUMP: begin upd = 1'b1; upd_next = rtgt; end
        BR_COND: begin
          upd = 1'b1;
          if (nt == '0)     upd_next = rtgt;
          else if (t == '0) upd_next = r_pc + 1'b1;
          else begin
            diverged         = 1'b1;
            upd_next         = rrec;
            upd_push         = 2'b11;
            upd_push_pc[0]   = r_pc + 1'b1;
            upd_push_mask[0] = nt;
            upd_push_pc[1]   = rtgt;
            upd_push_mask[1] = t;
          end
        end
        default: pop = 1'b1;
      endcase
    end
  end
endmodule
