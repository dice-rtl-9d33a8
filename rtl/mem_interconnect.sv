// mem_interconnect: the request/response interconnect between memory clients
// and one memory port.  It is used twice: inside a CGRA cluster to join its
// CPs onto the cluster's memory port (CLUSTER_LEVEL=0, the requester number
// is written into tag.cp), and at the top to join the clusters onto the port
// towards the L2 side (CLUSTER_LEVEL=1, tag.cluster).  Requests are granted
// round robin, one per cycle, with ready/valid on both sides; a response is
// delivered to the requester named in its tag, with that requester's ready.
// The paper only names the interconnect; this organisation is this design's.
module mem_interconnect
  import dice_pkg::*;
#(
  parameter int unsigned N             = 4,
  parameter bit          CLUSTER_LEVEL = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic     [N-1:0]    in_req_valid,
  output logic     [N-1:0]    in_req_ready,
  input  mem_req_t [N-1:0]    in_req,
  output logic     [N-1:0]    in_rsp_valid,
  input  logic     [N-1:0]    in_rsp_ready,
  output mem_rsp_t            in_rsp,
  output logic                out_req_valid,
  input  logic                out_req_ready,
  output mem_req_t            out_req,
  input  logic                out_rsp_valid,
  output logic                out_rsp_ready,
  input  mem_rsp_t            out_rsp
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] rr, pick, dst;
  logic          any;

  always_comb begin
    any = 1'b0; pick = '0;
    for (int i = 1; i <= int'(N); i++) begin
      automatic logic [IW-1:0] r = IW'((int'(rr) + i) % int'(N));
      if (!any && in_req_valid[r]) begin any = 1'b1; pick = r; end
    end
    in_req_ready = '0;
    if (any) in_req_ready[pick] = out_req_ready;
    out_req_valid = any;
    out_req       = in_req[pick];
    if (CLUSTER_LEVEL) out_req.tag.cluster = 6'(pick);
    else               out_req.tag.cp      = 2'(pick);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      rr <= IW'(N - 1);
    else if (any && out_req_ready)   rr <= pick;
  end

  assign dst    = CLUSTER_LEVEL ? IW'(out_rsp.tag.cluster) : IW'(out_rsp.tag.cp);
  assign in_rsp = out_rsp;
  always_comb begin
    in_rsp_valid = '0;
    if (int'(dst) < int'(N)) in_rsp_valid[dst] = out_rsp_valid;
    out_rsp_ready = (int'(dst) < int'(N)) ? in_rsp_ready[dst] : 1'b1;
  end
endmodule
