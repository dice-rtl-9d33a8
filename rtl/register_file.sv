// register_file: the conflict-free, swizzled register file of a CP with its
// shared constant buffer.
//
// NUM_REGS (32) general-purpose register banks, one per logical register
// index, each THREADS deep; register r of physical thread T lives in bank
// (r + T) mod 32 at row T.  One thread's registers therefore sit in
// different banks and are all read in one cycle, and neighbouring threads'
// copies of the same register sit in different banks, so the co-dispatched
// threads T, T+K, ... of an unrolled p-graph read in parallel as long as the
// compiler kept their register sets apart (asserted here).  Each bank has one
// read and one write port.  Writes come from the CGRA (up to N_FOUT per cycle,
// priority) and from load data (up to 8 words per cycle); a load word whose
// bank is taken that cycle is not accepted and is offered again by the LDST
// unit.  Reads: rd_data is valid one cycle after rd_en, for the registers in
// rd_regs, un-swizzled to register order.  The constant buffer holds
// CONST_ENTRIES words shared by all threads (kernel parameters), written by
// parameter loads and read in parallel by the CGRA input ports.  Banking and
// swizzling follow the paper; port counts and sizes not in the paper are
// this design's choices.
module register_file
  import dice_pkg::*;
#(
  parameter int unsigned THREADS = MAX_THREADS
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // read, one thread per lane
  input  logic [NT_MAX-1:0]                      rd_en,
  input  logic [NT_MAX-1:0][TID_W-1:0]           rd_tid,
  input  logic [NUM_REGS-1:0]                    rd_regs,
  output logic [NT_MAX-1:0][NUM_REGS-1:0][XLEN-1:0] rd_data,
  // CGRA writeback
  input  logic [N_FOUT-1:0]                      cw_en,
  input  logic [N_FOUT-1:0][TID_W-1:0]           cw_tid,
  input  logic [N_FOUT-1:0][4:0]                 cw_reg,
  input  logic [N_FOUT-1:0][XLEN-1:0]            cw_data,
  // load writeback
  input  logic [SECTOR_WORDS-1:0]                lw_en,
  input  logic [SECTOR_WORDS-1:0][TID_W-1:0]     lw_tid,
  input  logic [4:0]                             lw_reg,
  input  logic [SECTOR_WORDS-1:0][XLEN-1:0]      lw_data,
  output logic [SECTOR_WORDS-1:0]                lw_ack,
  // shared constant buffer
  input  logic                                   cb_we,
  input  logic [4:0]                             cb_idx,
  input  logic [XLEN-1:0]                        cb_data,
  output logic [CONST_ENTRIES-1:0][XLEN-1:0]     cb_q
);
  logic [XLEN-1:0] bank [NUM_REGS][THREADS];

  logic [NUM_REGS-1:0]                 b_re, b_we;
  logic [NUM_REGS-1:0][TID_W-1:0]      b_rrow, b_wrow;
  logic [NUM_REGS-1:0][XLEN-1:0]       b_wdata, b_q;
  logic [NT_MAX-1:0][TID_W-1:0]        tid_q;
  logic [NUM_REGS-1:0]                 regs_q;

  function automatic logic [4:0] bank_of(logic [4:0] r, logic [TID_W-1:0] t);
    return r + t[4:0];
  endfunction

  // ---------------------------------------------------------------- routing
  always_comb begin
    b_re = '0; b_rrow = '0; b_we = '0; b_wrow = '0; b_wdata = '0; lw_ack = '0;
    for (int l = NT_MAX - 1; l >= 0; l--)
      for (int r = 0; r < NUM_REGS; r++)
        if (rd_en[l] && rd_regs[r]) begin
          b_re[bank_of(5'(r), rd_tid[l])]   = 1'b1;
          b_rrow[bank_of(5'(r), rd_tid[l])] = rd_tid[l];
        end
    for (int w = N_FOUT - 1; w >= 0; w--)
      if (cw_en[w]) begin
        b_we[bank_of(cw_reg[w], cw_tid[w])]    = 1'b1;
        b_wrow[bank_of(cw_reg[w], cw_tid[w])]  = cw_tid[w];
        b_wdata[bank_of(cw_reg[w], cw_tid[w])] = cw_data[w];
      end
    for (int w = 0; w < SECTOR_WORDS; w++)
      if (lw_en[w] && !b_we[bank_of(lw_reg, lw_tid[w])]) begin
        b_we[bank_of(lw_reg, lw_tid[w])]    = 1'b1;
        b_wrow[bank_of(lw_reg, lw_tid[w])]  = lw_tid[w];
        b_wdata[bank_of(lw_reg, lw_tid[w])] = lw_data[w];
        lw_ack[w] = 1'b1;
      end
  end

  // ---------------------------------------------------------------- banks
  for (genvar b = 0; b < NUM_REGS; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (b_we[b]) bank[b][b_wrow[b] % THREADS] <= b_wdata[b];
      if (b_re[b]) b_q[b] <= bank[b][b_rrow[b] % THREADS];
    end
  end

  always_ff @(posedge clk) begin
    tid_q  <= rd_tid;
    regs_q <= rd_regs;
  end

  always_comb begin
    for (int l = 0; l < NT_MAX; l++)
      for (int r = 0; r < NUM_REGS; r++)
        rd_data[l][r] = regs_q[r] ? b_q[bank_of(5'(r), tid_q[l])] : '0;
  end

  // ---------------------------------------------------------------- constants
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     cb_q <= '0;
    else if (cb_we) cb_q[cb_idx] <= cb_data;
  end

  // co-dispatched threads must not meet in a bank
  function automatic logic [NUM_REGS-1:0] banks_of(logic [NUM_REGS-1:0] regs, logic [TID_W-1:0] t);
    return (regs << t[4:0]) | (regs >> (6'd32 - {1'b0, t[4:0]}));
  endfunction
  always_ff @(posedge clk) if (rst_n) begin
    for (int l1 = 0; l1 < NT_MAX; l1++)
      for (int l2 = l1 + 1; l2 < NT_MAX; l2++)
        if (rd_en[l1] && rd_en[l2])
          assert ((banks_of(rd_regs, rd_tid[l1]) & banks_of(rd_regs, rd_tid[l2])) == '0)
            else $error("register_file: bank conflict between lanes %0d and %0d", l1, l2);
  end
endmodule
