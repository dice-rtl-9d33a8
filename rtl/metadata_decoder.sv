// metadata_decoder: the Decoder of the FDR stage.
//
// Unpacks the six metadata words of a p-graph into the fields of the p-graph
// metadata (BITSTREAM_ADDR, BITSTREAM_LENGTH, UNROLLING_FACTOR, LAT, IN_REGS,
// OUT_REGS, LD_DEST_REGS, NUM_STORES, BRANCH, BARRIER, PARAMETER_LOAD) and
// derives what the CGRA peripherals need: the number of co-dispatched threads
// and their interval K (2x: K=16, 4x: K=8; the 3x code is unsupported and
// decodes as 1x), which load ports are used, and the registers the scoreboard
// must check before dispatching a thread.  Field widths follow the paper; the
// bit positions (the struct packed into words 0..5, word 0 holding the lowest
// bits) are this design's choice.  Purely combinational.
module metadata_decoder
  import dice_pkg::*;
(
  input  logic [MD_WORDS-1:0][31:0] words,
  output pgraph_md_t                md,
  output logic [2:0]                n_lanes,
  output logic [4:0]                k,
  output logic [N_LDPORTS-1:0]      ld_used,
  output logic [NUM_REGS-1:0]       check_regs
);
  logic [MD_WORDS*32-1:0] flat;
  assign flat = words;

  always_comb begin
    md = pgraph_md_t'(flat[$bits(pgraph_md_t)-1:0]);
    if (md.unrolling_factor == 2'd3) md.unrolling_factor = 2'd0;
    n_lanes = 3'(unroll_n(md.unrolling_factor));
    k       = 5'(unroll_k(md.unrolling_factor));
    for (int p = 0; p < N_LDPORTS; p++) ld_used[p] = md.ld_dest_regs[p] != REG_NONE;
    check_regs = md.in_regs[NUM_REGS-1:0] | md.out_regs[NUM_REGS-1:0];
  end
endmodule
