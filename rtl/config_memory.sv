// config_memory: the double-buffered CGRA configuration memory (CM0/CM1).
//
// Two banks each hold one complete CGRA configuration (CFG_WORDS 32-bit
// words, 192 bytes) together with the address of the bitstream it holds and a
// valid bit.  The bank named by `active` drives the fabric; the other can be
// written at the same time, one word per cycle, so a new p-graph is loaded
// while the CGRA keeps executing the current one.  Starting a load
// (ld_start) invalidates the target bank and records the new address; ld_done
// marks it valid.  The double buffering and the residency check follow the
// paper; the word-serial write port is this design's choice.  Writes take
// effect at the next clock edge; reset invalidates both banks.
module config_memory
  import dice_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         active,       // bank driving the fabric
  input  logic                         ld_start,
  input  logic                         ld_bank,
  input  logic [31:0]                  ld_addr,
  input  logic                         wr_en,
  input  logic [$clog2(CFG_WORDS)-1:0] wr_idx,
  input  logic [31:0]                  wr_data,
  input  logic                         ld_done,
  output logic [1:0]                   bank_valid,
  output logic [1:0][31:0]             bank_addr,
  output cgra_cfg_t                    cfg
);
  logic [1:0][CFG_WORDS-1:0][31:0] mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_valid <= '0;
      bank_addr  <= '0;
      mem        <= '0;
    end else begin
      if (ld_start) begin
        bank_valid[ld_bank] <= 1'b0;
        bank_addr[ld_bank]  <= ld_addr;
      end
      if (wr_en)   mem[ld_bank][wr_idx] <= wr_data;
      if (ld_done) bank_valid[ld_bank] <= 1'b1;
    end
  end

  assign cfg = cgra_cfg_t'(mem[active]);

  // the bank being executed must never be rewritten
  always_ff @(posedge clk) if (rst_n) assert (!(wr_en && ld_bank == active && bank_valid[active]))
    else $error("config_memory: write into the active bank");
endmodule
