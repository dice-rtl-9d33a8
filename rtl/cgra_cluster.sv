// cgra_cluster: one CGRA Cluster (CC), N_CP CGRA Processors (4 by default)
// sharing the cluster's memory port.
//
// The CPs are independent: each runs the CTAs launched on it.  Their memory
// traffic (p-graph cache refills and LDST sector commands) is joined by a
// round-robin interconnect; responses return to the CP named in the tag.  In
// the full design the cluster's 96 KB L1 data cache / shared memory sits on
// this port; it is not part of this RTL, so the port is the cluster's
// boundary.  Launch and completion signals of each CP are brought out as
// arrays.  The 4-CP grouping is the paper's; the shared port is this
// design's simplification of the cluster-level memory path.
module cgra_cluster
  import dice_pkg::*;
#(
  parameter int unsigned N_CP    = 4,
  parameter int unsigned THREADS = MAX_THREADS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         tmcu_enable,
  input  logic [N_CP-1:0]              launch,
  input  logic [2:0][15:0]             launch_cta_id,
  input  logic [7:0]                   launch_kernel_id,
  input  logic [TID_W:0]               launch_nthreads,
  input  logic [TID_W-1:0]             launch_tbase,
  input  logic [31:0]                  launch_md_base,
  output logic [N_CP-1:0]              launch_ready,
  output logic [N_CP-1:0]              cta_done,
  output logic [N_CP-1:0][2:0][15:0]   cta_done_id,
  output logic                         mem_req_valid,
  input  logic                         mem_req_ready,
  output mem_req_t                     mem_req,
  input  logic                         mem_rsp_valid,
  output logic                         mem_rsp_ready,
  input  mem_rsp_t                     mem_rsp,
  output logic [N_CP-1:0]              idle,
  output cp_stats_t [N_CP-1:0]         stats
);
  logic     [N_CP-1:0] rq_v, rq_r, rs_v, rs_r;
  mem_req_t [N_CP-1:0] rq;
  mem_rsp_t            rs;

  for (genvar i = 0; i < N_CP; i++) begin : g_cp
    cgra_processor #(.THREADS(THREADS)) u_cp (
      .clk, .rst_n, .tmcu_enable, .launch(launch[i]), .launch_cta_id, .launch_kernel_id,
      .launch_nthreads, .launch_tbase, .launch_md_base, .launch_ready(launch_ready[i]),
      .cta_done(cta_done[i]), .cta_done_id(cta_done_id[i]),
      .mem_req_valid(rq_v[i]), .mem_req_ready(rq_r[i]), .mem_req(rq[i]),
      .mem_rsp_valid(rs_v[i]), .mem_rsp_ready(rs_r[i]), .mem_rsp(rs),
      .idle(idle[i]), .stats(stats[i])
    );
  end

  mem_interconnect #(.N(N_CP), .CLUSTER_LEVEL(1'b0)) u_xbar (
    .clk, .rst_n, .in_req_valid(rq_v), .in_req_ready(rq_r), .in_req(rq),
    .in_rsp_valid(rs_v), .in_rsp_ready(rs_r), .in_rsp(rs),
    .out_req_valid(mem_req_valid), .out_req_ready(mem_req_ready), .out_req(mem_req),
    .out_rsp_valid(mem_rsp_valid), .out_rsp_ready(mem_rsp_ready), .out_rsp(mem_rsp)
  );
endmodule
