// dice_top: the DICE device, N_CLUSTERS CGRA clusters (34 by default, each of
// 4 CPs: 136 CPs, 2176 PEs) joined by an interconnect to one memory port.
//
// The kernel driver launches a CTA on a chosen CP of a chosen cluster with
// the CTA id, kernel id, thread count, first physical thread and the base
// address of the kernel's p-graph metadata; the CP reports when the CTA has
// finished (cta_done, one bit per CP).  Everything a CP fetches or accesses (metadata, bitstreams,
// global data) goes through this one memory port, where the L2 cache and
// DRAM of the full system would sit; they are outside this RTL.  The tag of
// every request names cluster, CP and the requesting unit, and responses must
// return it unchanged (in any order).  `tmcu_enable` switches the LDST units
// between coalescing (the DICE configuration) and the uncoalesced baseline.
// `stats` sums the event counters of all CPs.  The cluster count is the
// paper's; the single memory port is this design's boundary.
//
// Lint note: a circular-logic warning on the interconnect ready vector is a
// false path between different elements of one packed vector (each
// cluster's ready depends only on the arbiter's choice, which does not depend
// on ready); it stands.
module dice_top
  import dice_pkg::*;
#(
  parameter int unsigned N_CLUSTERS = 34,
  parameter int unsigned N_CP       = 4,
  parameter int unsigned THREADS    = MAX_THREADS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   tmcu_enable,
  input  logic                   launch,
  input  logic [5:0]             launch_cluster,
  input  logic [1:0]             launch_cp,
  input  logic [2:0][15:0]       launch_cta_id,
  input  logic [7:0]             launch_kernel_id,
  input  logic [TID_W:0]         launch_nthreads,
  input  logic [TID_W-1:0]       launch_tbase,
  input  logic [31:0]            launch_md_base,
  output logic                   launch_ready,
  output logic [N_CLUSTERS-1:0][N_CP-1:0]          cta_done,
  output logic [N_CLUSTERS-1:0][N_CP-1:0][2:0][15:0] cta_done_id,
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output mem_req_t               mem_req,
  input  logic                   mem_rsp_valid,
  output logic                   mem_rsp_ready,
  input  mem_rsp_t               mem_rsp,
  output logic                   idle,
  output cp_stats_t              stats
);
  logic     [N_CLUSTERS-1:0]            rq_v, rq_r, rs_v, rs_r;
  mem_req_t [N_CLUSTERS-1:0]            rq;
  mem_rsp_t                             rs;
  logic     [N_CLUSTERS-1:0][N_CP-1:0]  l_en, l_rdy, c_idle;
  cp_stats_t [N_CLUSTERS-1:0][N_CP-1:0] st;

  always_comb begin
    l_en = '0;
    if (launch && int'(launch_cluster) < int'(N_CLUSTERS) && int'(launch_cp) < int'(N_CP))
      l_en[launch_cluster][launch_cp] = 1'b1;
    launch_ready = (int'(launch_cluster) < int'(N_CLUSTERS) && int'(launch_cp) < int'(N_CP))
                   ? l_rdy[launch_cluster][launch_cp] : 1'b0;
  end

  for (genvar i = 0; i < N_CLUSTERS; i++) begin : g_cc
    cgra_cluster #(.N_CP(N_CP), .THREADS(THREADS)) u_cc (
      .clk, .rst_n, .tmcu_enable, .launch(l_en[i]), .launch_cta_id, .launch_kernel_id,
      .launch_nthreads, .launch_tbase, .launch_md_base, .launch_ready(l_rdy[i]),
      .cta_done(cta_done[i]), .cta_done_id(cta_done_id[i]),
      .mem_req_valid(rq_v[i]), .mem_req_ready(rq_r[i]), .mem_req(rq[i]),
      .mem_rsp_valid(rs_v[i]), .mem_rsp_ready(rs_r[i]), .mem_rsp(rs),
      .idle(c_idle[i]), .stats(st[i])
    );
  end

  mem_interconnect #(.N(N_CLUSTERS), .CLUSTER_LEVEL(1'b1)) u_noc (
    .clk, .rst_n, .in_req_valid(rq_v), .in_req_ready(rq_r), .in_req(rq),
    .in_rsp_valid(rs_v), .in_rsp_ready(rs_r), .in_rsp(rs),
    .out_req_valid(mem_req_valid), .out_req_ready(mem_req_ready), .out_req(mem_req),
    .out_rsp_valid(mem_rsp_valid), .out_rsp_ready(mem_rsp_ready), .out_rsp(mem_rsp)
  );

  // event counters summed over all CPs
  always_comb begin
    stats = '0;
    for (int i = 0; i < N_CLUSTERS; i++)
      for (int j = 0; j < N_CP; j++)
        for (int f = 0; f < 16; f++)
          stats[f*32 +: 32] = stats[f*32 +: 32] + st[i][j][f*32 +: 32];
  end
  assign idle = &c_idle;
endmodule
