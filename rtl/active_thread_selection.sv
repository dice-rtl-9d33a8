// active_thread_selection: the Active Thread Selection Logic of the dispatcher.
//
// Loaded with an e-block's active mask, it hands out the active threads in
// ascending thread id, skipping inactive ones entirely.  With thread unrolling
// it hands out groups of n threads (T, T+K, T+2K, ...), n = 1, 2 or 4 with
// K = 16 for 2x and K = 8 for 4x: group bases are the T with
// (T mod n*K) < K, visited in ascending order, and a group is skipped only if
// none of its threads is active.  `lanes` marks the active members.  The
// current group is shown combinationally; `advance` removes it at the next
// edge.  Grouping and order follow the paper; the remaining-mask
// implementation is this design's.
module active_thread_selection
  import dice_pkg::*;
#(
  parameter int unsigned THREADS = MAX_THREADS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic [THREADS-1:0]       mask,
  input  logic [2:0]               n_lanes,   // 1, 2 or 4
  input  logic [4:0]               k,         // 1, 16 or 8
  input  logic                     advance,
  output logic                     valid,
  output logic [TID_W-1:0]         base,
  output logic [NT_MAX-1:0]        lanes,
  output logic                     empty
);
  logic [THREADS-1:0] rem;
  logic [2:0]         n_q;
  logic [4:0]         k_q;

  function automatic logic is_base(int t, logic [2:0] n, logic [4:0] kk);
    if (n == 3'd1) return 1'b1;
    return (t % (int'(n) * int'(kk))) < int'(kk);
  endfunction

  always_comb begin
    valid = 1'b0; base = '0; lanes = '0;
    for (int t = THREADS - 1; t >= 0; t--) begin
      if (is_base(t, n_q, k_q)) begin
        logic [NT_MAX-1:0] l;
        for (int j = 0; j < NT_MAX; j++)
          l[j] = (j < int'(n_q)) && (t + j * int'(k_q) < THREADS) && rem[(t + j * int'(k_q)) % THREADS];
        if (l != '0) begin valid = 1'b1; base = TID_W'(t); lanes = l; end
      end
    end
  end
  assign empty = (rem == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; n_q <= 3'd1; k_q <= 5'd1;
    end else if (load) begin
      rem <= mask; n_q <= n_lanes; k_q <= k;
    end else if (advance && valid) begin
      for (int j = 0; j < NT_MAX; j++)
        if (lanes[j]) rem[(int'(base) + j * int'(k_q)) % THREADS] <= 1'b0;
    end
  end
endmodule
