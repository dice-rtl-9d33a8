// dice_pkg: types and constants shared by the DICE CGRA Processor (CP) RTL.
//
// Sizes that the DICE organisation fixes are taken from it: 32 logical
// registers per thread held in 32 register banks, 2048 threads per cluster of
// 4 CPs (512 threads per CP), up to 4 threads dispatched together (unrolling
// factor 2 or 4 with thread interval K=16 or K=8), a 4x5 CGRA, 4 memory
// request ports and the p-graph metadata fields with their widths.  Everything
// else here (the packing of metadata into 32-bit words, the bitstream layout,
// the register index space, the memory bus) is this implementation's choice.
package dice_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned XLEN          = 32;   // datapath word
  localparam int unsigned NUM_REGS      = 32;   // Nr logical registers = banks
  localparam int unsigned REG_W         = 6;    // register index width (Table 1)
  localparam int unsigned MAX_THREADS   = 512;  // threads per CP (2048 / 4 CPs)
  localparam int unsigned TID_W         = 9;
  localparam int unsigned NT_MAX        = 4;    // max co-dispatched threads
  localparam int unsigned LANE_W        = 2;
  localparam int unsigned N_LDPORTS     = 4;    // memory request ports
  localparam int unsigned SECTOR_WORDS  = 8;    // 32-byte sector of 4-byte words
  localparam int unsigned PC_W          = 16;   // p-graph metadata address (word)
  localparam int unsigned CTA_SLOTS     = 4;    // resident CTAs per CP
  localparam int unsigned CTA_W         = 2;
  localparam int unsigned EB_W          = 3;    // e-block id (BRT entries)
  localparam int unsigned BRT_ENTRIES   = 8;
  localparam int unsigned CONST_ENTRIES = 32;   // shared constant buffer words
  localparam int unsigned MD_WORDS      = 6;    // metadata words per p-graph

  // register index space seen by the CGRA input ports
  localparam logic [REG_W-1:0] REG_TID   = 6'd32; // thread id (IN_REGS bit 32)
  localparam logic [REG_W-1:0] REG_CTAID = 6'd33; // CTA id    (IN_REGS bit 33)
  localparam logic [REG_W-1:0] REG_NONE  = 6'h3F; // unused LD_DEST_REGS slot

  // ---------------------------------------------------------------- CGRA
  localparam int unsigned ROWS       = 4;
  localparam int unsigned COLS       = 5;
  localparam int unsigned N_TILES    = ROWS * COLS;
  localparam int unsigned N_FIN      = 8;    // fabric input ports (from RF)
  localparam int unsigned N_FOUT     = 8;    // fabric output ports
  localparam int unsigned SB_IN      = 16;   // switch-box inputs per tile
  localparam int unsigned SEL_W      = 4;
  localparam logic [SEL_W-1:0] SEL_NONE = 4'hF; // "no predicate" select

  // A value travelling through the fabric: data plus its control bit.  The
  // control bit is the 1-bit predicate: it gates register writeback and marks
  // memory requests valid.
  typedef struct packed {
    logic            ctrl;
    logic [XLEN-1:0] data;
  } fword_t;

  typedef enum logic [4:0] {
    OP_NOP  = 5'd0,  OP_PASS = 5'd1,  OP_ADD  = 5'd2,  OP_SUB  = 5'd3,
    OP_MUL  = 5'd4,  OP_AND  = 5'd5,  OP_OR   = 5'd6,  OP_XOR  = 5'd7,
    OP_SHL  = 5'd8,  OP_SHR  = 5'd9,  OP_SRA  = 5'd10, OP_SLT  = 5'd11,
    OP_SLTU = 5'd12, OP_EQ   = 5'd13, OP_NE   = 5'd14, OP_MIN  = 5'd15,
    OP_MAX  = 5'd16, OP_SEL  = 5'd17, OP_MULH = 5'd18
  } pe_op_e;

  // One tile's configuration: 64 bits = two bitstream words.
  typedef struct packed {
    logic [7:0]       rsvd;
    logic [2:0]       sb_reg;    // register SB outputs {p, b, a}
    logic             out_reg;   // register the PE output (1) or bypass (0)
    logic             pred_inv;  // invert the predicate source
    logic [SEL_W-1:0] sel_p;     // predicate source, SEL_NONE = always true
    logic [SEL_W-1:0] sel_b;
    logic [SEL_W-1:0] sel_a;
    logic [1:0]       rsvd2;
    pe_op_e           op;
    logic [XLEN-1:0]  imm;       // constant operand (switch-box input 15)
  } tile_cfg_t;

  // Fabric input port: picks one lane's register (or a constant-buffer word).
  typedef struct packed {
    logic              en;
    logic              is_const;
    logic [LANE_W-1:0] lane;
    logic [REG_W-1:0]  idx;
    logic [5:0]        rsvd;
  } fin_cfg_t;   // 16 bits

  typedef enum logic [2:0] {
    FO_NONE = 3'd0, FO_WB = 3'd1, FO_LD = 3'd2, FO_ST_ADDR = 3'd3,
    FO_ST_DATA = 3'd4, FO_BR = 3'd5
  } fout_kind_e;

  // Fabric output port: which tile drives it and where the value goes.
  typedef struct packed {
    fout_kind_e        kind;
    logic [4:0]        tile;
    logic [LANE_W-1:0] lane;
    logic [REG_W-1:0]  idx;     // register (FO_WB) or LDST port (FO_LD/ST)
  } fout_cfg_t;  // 16 bits

  typedef struct packed {
    fout_cfg_t [N_FOUT-1:0]  fout;
    fin_cfg_t  [N_FIN-1:0]   fin;
    tile_cfg_t [N_TILES-1:0] tile;
  } cgra_cfg_t;

  localparam int unsigned CFG_BITS  = $bits(cgra_cfg_t);
  localparam int unsigned CFG_WORDS = CFG_BITS / 32;   // 48 words = 192 bytes

  // ---------------------------------------------------------------- metadata
  typedef enum logic [1:0] {
    BR_NEXT = 2'd0, BR_JUMP = 2'd1, BR_COND = 2'd2, BR_EXIT = 2'd3
  } br_kind_e;

  // BRANCH_* field: 32 bits
  typedef struct packed {
    logic [14:0] reconv;   // reconvergence p-graph of a divergent branch
    logic [14:0] target;   // taken / jump target p-graph
    br_kind_e    kind;
  } branch_md_t;

  typedef struct packed {
    logic [31:0]                       bitstream_addr;
    logic [7:0]                        bitstream_length;
    logic [1:0]                        unrolling_factor; // 0:1x 1:2x 2:4x
    logic [7:0]                        lat;
    logic [NUM_REGS+1:0]               in_regs;          // 34-bit bitmap
    logic [NUM_REGS+1:0]               out_regs;         // 34-bit bitmap
    logic [N_LDPORTS-1:0][REG_W-1:0]   ld_dest_regs;     // 4 x 6 bits
    logic [2:0]                        num_stores;
    branch_md_t                        branch;
    logic                              barrier;
    logic                              parameter_load;
  } pgraph_md_t;

  // ---------------------------------------------------------------- memory
  typedef enum logic [1:0] { SRC_ICACHE = 2'd0, SRC_LDST = 2'd1 } mem_src_e;

  // Tag carried with a request and echoed unchanged with its response.
  typedef struct packed {
    logic [5:0]                          cluster;
    logic [1:0]                          cp;
    mem_src_e                            src;
    logic [1:0]                          port;
    logic [EB_W-1:0]                     ebid;
    logic                                to_const;   // parameter load
    logic [REG_W-1:0]                    dest;
    logic [SECTOR_WORDS-1:0][TID_W-1:0]  tid;        // thread of each word
  } mem_tag_t;

  typedef struct packed {
    logic                                 is_store;
    logic [31:0]                          addr;      // 32-byte aligned
    logic [SECTOR_WORDS-1:0]              wmask;     // words used
    logic [SECTOR_WORDS-1:0][XLEN-1:0]    wdata;
    mem_tag_t                             tag;
  } mem_req_t;

  typedef struct packed {
    logic                                 is_store;
    logic [SECTOR_WORDS-1:0]              wmask;
    logic [SECTOR_WORDS-1:0][XLEN-1:0]    rdata;
    mem_tag_t                             tag;
  } mem_rsp_t;

  // Request of one thread on one LDST port, as it leaves the CGRA.
  typedef struct packed {
    logic             is_store;
    logic [31:0]      addr;     // byte address, word aligned
    logic [XLEN-1:0]  data;
    logic [TID_W-1:0] tid;
    logic [EB_W-1:0]  ebid;
    logic [REG_W-1:0] dest;
    logic             to_const;
  } thread_req_t;

  // Coalesced command held by a TMCU.
  typedef struct packed {
    logic                               is_store;
    logic [26:0]                        sector;   // addr[31:5]
    logic [SECTOR_WORDS-1:0]            wmask;
    logic [SECTOR_WORDS-1:0][XLEN-1:0]  data;
    logic [SECTOR_WORDS-1:0][TID_W-1:0] tid;
    logic [EB_W-1:0]                    ebid;
    logic [REG_W-1:0]                   dest;
    logic                               to_const;
  } coal_cmd_t;

  // Event counters of one CP, brought out for observation.
  typedef struct packed {
    logic [31:0] eblocks;       // e-blocks dispatched
    logic [31:0] retired;       // e-blocks retired by the BRT
    logic [31:0] mispredict;    // speculative e-blocks discarded
    logic [31:0] md_reuse;      // metadata fetches served by the last fetch
    logic [31:0] bs_loads;      // bitstreams loaded into a CM bank
    logic [31:0] bs_hits;       // bitstreams already resident
    logic [31:0] barrier_wait;  // cycles an e-block waited on a barrier
    logic [31:0] diverged;      // divergent branches pushed on a PDOM stack
    logic [31:0] reconverged;   // PDOM entries popped
    logic [31:0] groups;        // dispatch groups
    logic [31:0] unrolled;      // groups with more than one thread
    logic [31:0] stall_sb;      // scoreboard stall cycles
    logic [31:0] stall_credit;  // LDST credit stall cycles
    logic [31:0] mem_cmds;      // LDST memory commands
    logic [31:0] mem_words;     // thread requests carried by them
    logic [31:0] ctas_done;
  } cp_stats_t;

  // Number of threads co-dispatched for an UNROLLING_FACTOR code, and K.
  function automatic int unsigned unroll_n(input logic [1:0] code);
    return (code == 2'd2) ? 4 : (code == 2'd1) ? 2 : 1;
  endfunction
  function automatic int unsigned unroll_k(input logic [1:0] code);
    return (code == 2'd2) ? 8 : (code == 2'd1) ? 16 : 1;
  endfunction

endpackage
