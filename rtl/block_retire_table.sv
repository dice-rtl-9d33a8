// block_retire_table: the Block Retire Table (BRT) of the RE stage.
//
// Each entry is an e-block that has been dispatched: its CTA, its counts of
// pending loads and pending stores (one per thread-level request) and whether
// it has left the DE stage.  Counts rise when the dispatcher sends a request
// to the LDST unit and fall as memory responses come back, word by word.  An
// entry whose e-block has left DE and has no pending request is retired (one
// per cycle): it is freed and `ret` reports it to the CP control, which
// passes the news to the Branch Handler and the Active CTA Table.  `cta_busy`
// says which CTAs still own entries; the FDR stage uses it for barriers.  The
// table and its pending counters follow the paper; entry count and counter
// widths are this design's.
module block_retire_table
  import dice_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  alloc,
  input  logic [CTA_W-1:0]      alloc_cta,
  output logic                  full,
  output logic [EB_W-1:0]       alloc_id,
  input  logic [2:0]            inc_ld,        // requests issued this cycle
  input  logic [2:0]            inc_st,
  input  logic [EB_W-1:0]       inc_id,
  input  logic [3:0]            dec_ld,        // words answered this cycle
  input  logic [3:0]            dec_st,
  input  logic [EB_W-1:0]       dec_id,
  input  logic                  de_done,
  input  logic [EB_W-1:0]       de_done_id,
  output logic                  ret,
  output logic [EB_W-1:0]       ret_id,
  output logic [CTA_W-1:0]      ret_cta,
  output logic [CTA_SLOTS-1:0]  cta_busy,
  output logic [BRT_ENTRIES-1:0][15:0] pend_ld,
  output logic [BRT_ENTRIES-1:0][15:0] pend_st
);
  logic [BRT_ENTRIES-1:0]            valid, in_re;
  logic [BRT_ENTRIES-1:0][CTA_W-1:0] cta;

  always_comb begin
    alloc_id = '0;
    for (int e = BRT_ENTRIES - 1; e >= 0; e--) if (!valid[e]) alloc_id = EB_W'(e);
    full = &valid;
    ret = 1'b0; ret_id = '0;
    for (int e = BRT_ENTRIES - 1; e >= 0; e--)
      if (valid[e] && in_re[e] && pend_ld[e] == 0 && pend_st[e] == 0) begin
        ret = 1'b1; ret_id = EB_W'(e);
      end
    ret_cta  = cta[ret_id];
    cta_busy = '0;
    for (int e = 0; e < BRT_ENTRIES; e++) if (valid[e]) cta_busy[cta[e]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0; in_re <= '0; cta <= '0; pend_ld <= '0; pend_st <= '0;
    end else begin
      for (int e = 0; e < BRT_ENTRIES; e++) begin
        automatic logic [15:0] l = pend_ld[e], s = pend_st[e];
        if (EB_W'(e) == inc_id) begin l = l + 16'(inc_ld); s = s + 16'(inc_st); end
        if (EB_W'(e) == dec_id) begin l = l - 16'(dec_ld); s = s - 16'(dec_st); end
        pend_ld[e] <= l;
        pend_st[e] <= s;
      end
      if (de_done) in_re[de_done_id] <= 1'b1;
      if (ret) begin valid[ret_id] <= 1'b0; in_re[ret_id] <= 1'b0; end
      if (alloc && !full) begin
        valid[alloc_id]   <= 1'b1;
        in_re[alloc_id]   <= 1'b0;
        cta[alloc_id]     <= alloc_cta;
        pend_ld[alloc_id] <= '0;
        pend_st[alloc_id] <= '0;
      end
    end
  end

  always_ff @(posedge clk) if (rst_n) begin
    assert (!(dec_ld != 0 && !valid[dec_id])) else $error("BRT: response for a free entry");
  end
endmodule
