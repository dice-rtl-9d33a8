// active_cta_table: the Active CTA Table of the CS stage.
//
// One entry per resident CTA (hardware CTA id = entry index) holding what the
// kernel driver assigned: the CTA id (x,y,z), kernel id, thread count, first
// physical thread of the CTA in this CP, and the kernel's metadata base
// address.  Next to these it keeps the scheduling state the CS stage needs:
// the PC at which the CTA is to be scheduled next and whether it may be
// scheduled now.  Launch writes a free entry (lowest index) and reports it;
// `set_sched`/`clr_sched` are driven by the CP control (after decode, after
// branch resolution); `free` releases an entry when the CTA has finished.
// The entry fields follow the table drawn in the paper (hw_cta_id,
// cta_id.xyz, kernel_id, ...); the remaining fields are this design's.
module active_cta_table
  import dice_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  // launch
  input  logic                         launch,
  input  logic [2:0][15:0]             launch_cta_id,
  input  logic [7:0]                   launch_kernel_id,
  input  logic [TID_W:0]               launch_nthreads,
  input  logic [TID_W-1:0]             launch_tbase,
  input  logic [31:0]                  launch_md_base,
  output logic                         full,
  output logic [CTA_W-1:0]             launch_slot,
  // scheduling state
  input  logic                         set_sched,
  input  logic [CTA_W-1:0]             set_slot,
  input  logic [PC_W-1:0]              set_pc,
  input  logic                         clr_sched,
  input  logic [CTA_W-1:0]             clr_slot,
  input  logic                         free,
  input  logic [CTA_W-1:0]             free_slot,
  // contents
  output logic [CTA_SLOTS-1:0]                 valid,
  output logic [CTA_SLOTS-1:0]                 schedulable,
  output logic [CTA_SLOTS-1:0][PC_W-1:0]       sched_pc,
  output logic [CTA_SLOTS-1:0][2:0][15:0]      cta_id,
  output logic [CTA_SLOTS-1:0][7:0]            kernel_id,
  output logic [CTA_SLOTS-1:0][TID_W:0]        nthreads,
  output logic [CTA_SLOTS-1:0][TID_W-1:0]      tbase,
  output logic [CTA_SLOTS-1:0][31:0]           md_base
);
  always_comb begin
    launch_slot = '0;
    for (int s = CTA_SLOTS - 1; s >= 0; s--) if (!valid[s]) launch_slot = CTA_W'(s);
  end
  assign full = &valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0; schedulable <= '0; sched_pc <= '0; cta_id <= '0;
      kernel_id <= '0; nthreads <= '0; tbase <= '0; md_base <= '0;
    end else begin
      if (clr_sched) schedulable[clr_slot] <= 1'b0;
      if (set_sched) begin
        schedulable[set_slot] <= 1'b1;
        sched_pc[set_slot]    <= set_pc;
      end
      if (free) begin
        valid[free_slot]       <= 1'b0;
        schedulable[free_slot] <= 1'b0;
      end
      if (launch && !full) begin
        valid[launch_slot]       <= 1'b1;
        schedulable[launch_slot] <= 1'b1;
        sched_pc[launch_slot]    <= '0;
        cta_id[launch_slot]      <= launch_cta_id;
        kernel_id[launch_slot]   <= launch_kernel_id;
        nthreads[launch_slot]    <= launch_nthreads;
        tbase[launch_slot]       <= launch_tbase;
        md_base[launch_slot]     <= launch_md_base;
      end
    end
  end
endmodule
