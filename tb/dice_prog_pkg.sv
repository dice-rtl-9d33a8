// dice_prog_pkg: helpers for testbenches that build DICE programs by hand:
// CGRA configurations (tiles, input ports, output ports) flattened into
// bitstream words, and p-graph metadata flattened into its six words.  The
// formats are the ones defined in dice_pkg.
package dice_prog_pkg;
  import dice_pkg::*;

  // switch-box source numbers
  localparam int SRC_N = 8, SRC_S = 9, SRC_E = 10, SRC_W = 11, SRC_SELF = 12;
  localparam int SRC_ZERO = 13, SRC_ONE = 14, SRC_IMM = 15, SRC_NOPRED = 15;

  function automatic cgra_cfg_t set_tile(cgra_cfg_t c, int t, pe_op_e op, int sa, int sb,
                                         int sp = SRC_NOPRED, logic [31:0] imm = 0,
                                         bit oreg = 0, bit pinv = 0);
    c.tile[t]          = '0;
    c.tile[t].op       = op;
    c.tile[t].sel_a    = 4'(sa);
    c.tile[t].sel_b    = 4'(sb);
    c.tile[t].sel_p    = 4'(sp);
    c.tile[t].imm      = imm;
    c.tile[t].out_reg  = oreg;
    c.tile[t].pred_inv = pinv;
    return c;
  endfunction

  function automatic cgra_cfg_t set_fin(cgra_cfg_t c, int i, bit is_const, int lane, int idx);
    c.fin[i]          = '0;
    c.fin[i].en       = 1'b1;
    c.fin[i].is_const = is_const;
    c.fin[i].lane     = 2'(lane);
    c.fin[i].idx      = 6'(idx);
    return c;
  endfunction

  function automatic cgra_cfg_t set_fout(cgra_cfg_t c, int o, fout_kind_e k, int tile, int lane, int idx);
    c.fout[o].kind = k;
    c.fout[o].tile = 5'(tile);
    c.fout[o].lane = 2'(lane);
    c.fout[o].idx  = 6'(idx);
    return c;
  endfunction

  function automatic logic [31:0] cfg_word(cgra_cfg_t c, int i);
    logic [CFG_BITS-1:0] f;
    f = c;
    return f[i*32 +: 32];
  endfunction

  function automatic logic [31:0] md_word(pgraph_md_t md, int i);
    logic [MD_WORDS*32-1:0] f;
    f = '0;
    f[$bits(pgraph_md_t)-1:0] = md;
    return f[i*32 +: 32];
  endfunction

  function automatic pgraph_md_t new_md(logic [31:0] bs_addr, int lat, int unroll_code);
    pgraph_md_t m;
    m = '0;
    m.bitstream_addr   = bs_addr;
    m.bitstream_length = 8'(CFG_WORDS * 4);
    m.lat              = 8'(lat);
    m.unrolling_factor = 2'(unroll_code);
    m.ld_dest_regs     = {N_LDPORTS{REG_NONE}};
    return m;
  endfunction

  // ------------------------------------------------------------------
  // Test kernel used by the CP, cluster and top testbenches:
  //   c[g] = (a[g] > 5) ? 2*a[g] : a[g] + 100,   g = ctaid*B + tid
  // p-graphs (metadata at MD_BASE + 32*pc, bitstreams at BS_BASE + 256*pc):
  //   0 PARAMETER_LOAD: thread 0 loads &a, &c into constant words 0, 1
  //   1 BARRIER, unroll 4 (K=8): r2 = 4*g, load r1 = a[g]
  //   2 branch on r1 > 5 -> 4 (taken), reconvergence 5
  //   3 r3 = r1 + 100, jump 5
  //   4 r3 = r1 << 1
  //   5 unroll 2 (K=16): store r3 to c[g], exit
  typedef struct { logic [31:0] a; logic [31:0] d; } mw_t;
  typedef mw_t mw_q_t[$];

  localparam logic [31:0] MD_BASE = 32'h0000_1000;
  localparam logic [31:0] BS_BASE = 32'h0000_2000;
  localparam logic [31:0] PARAMS  = 32'h0000_3000;
  localparam logic [31:0] A_BASE  = 32'h0001_0000;
  localparam logic [31:0] C_BASE  = 32'h0002_0000;

  function automatic logic [31:0] a_val(int g);
    return 32'((g * 7) % 13);
  endfunction
  function automatic logic [31:0] c_val(int g);
    return (a_val(g) > 5) ? a_val(g) * 2 : a_val(g) + 100;
  endfunction

  function automatic mw_q_t build_kernel(int block_threads, int n_elems);
    mw_q_t q;
    cgra_cfg_t c [6];
    pgraph_md_t m [6];
    for (int p = 0; p < 6; p++) begin
      c[p] = '0;
      m[p] = new_md(BS_BASE + 32'(p * 256), 0, 0);
    end
    // pg0: parameter load by thread 0
    c[0] = set_fin(c[0], 0, 0, 0, REG_TID);
    c[0] = set_tile(c[0], 0, OP_EQ, 0, SRC_IMM, SRC_NOPRED, 0);
    c[0] = set_tile(c[0], 1, OP_PASS, SRC_IMM, SRC_ZERO, SRC_W, PARAMS);
    c[0] = set_tile(c[0], 2, OP_PASS, SRC_IMM, SRC_ZERO, SRC_W, PARAMS + 4);
    c[0] = set_fout(c[0], 0, FO_LD, 1, 0, 0);
    c[0] = set_fout(c[0], 1, FO_LD, 2, 0, 1);
    m[0].in_regs[32] = 1'b1;
    m[0].ld_dest_regs[0] = 6'd0;
    m[0].ld_dest_regs[1] = 6'd1;
    m[0].parameter_load = 1'b1;
    m[0].branch.kind = BR_NEXT;
    // pg1: address generation and load, four threads per cycle
    c[1] = set_fin(c[1], 4, 0, 0, REG_CTAID);
    c[1] = set_fin(c[1], 5, 1, 0, 0);
    for (int l = 0; l < 4; l++) begin
      c[1] = set_fin(c[1], l, 0, l, REG_TID);
      c[1] = set_tile(c[1], l*5 + 0, OP_MUL, 4, SRC_IMM, SRC_NOPRED, 32'(block_threads));
      c[1] = set_tile(c[1], l*5 + 1, OP_ADD, SRC_W, l, SRC_NOPRED, 0, 1);
      c[1] = set_tile(c[1], l*5 + 2, OP_SHL, SRC_W, SRC_IMM, SRC_NOPRED, 2);
      c[1] = set_tile(c[1], l*5 + 3, OP_ADD, SRC_W, 5);
      c[1] = set_fout(c[1], l,     FO_WB, l*5 + 2, l, 2);
      c[1] = set_fout(c[1], 4 + l, FO_LD, l*5 + 3, l, l);
      m[1].ld_dest_regs[l] = 6'd1;
    end
    m[1].lat = 8'd1;
    m[1].unrolling_factor = 2'd2;
    m[1].in_regs[32] = 1'b1; m[1].in_regs[33] = 1'b1;
    m[1].out_regs[2] = 1'b1;
    m[1].barrier = 1'b1;
    m[1].branch.kind = BR_NEXT;
    // pg2: branch predicate a > 5
    c[2] = set_fin(c[2], 0, 0, 0, 1);
    c[2] = set_tile(c[2], 0, OP_SLT, SRC_IMM, 0, SRC_NOPRED, 5);
    c[2] = set_fout(c[2], 0, FO_BR, 0, 0, 0);
    m[2].in_regs[1] = 1'b1;
    m[2].branch.kind = BR_COND; m[2].branch.target = 15'd4; m[2].branch.reconv = 15'd5;
    // pg3: not-taken path
    c[3] = set_fin(c[3], 0, 0, 0, 1);
    c[3] = set_tile(c[3], 0, OP_ADD, 0, SRC_IMM, SRC_NOPRED, 100, 1);
    c[3] = set_fout(c[3], 0, FO_WB, 0, 0, 3);
    m[3].lat = 8'd1;
    m[3].in_regs[1] = 1'b1; m[3].out_regs[3] = 1'b1;
    m[3].branch.kind = BR_JUMP; m[3].branch.target = 15'd5;
    // pg4: taken path
    c[4] = set_fin(c[4], 0, 0, 0, 1);
    c[4] = set_tile(c[4], 0, OP_SHL, 0, SRC_ONE);
    c[4] = set_fout(c[4], 0, FO_WB, 0, 0, 3);
    m[4].in_regs[1] = 1'b1; m[4].out_regs[3] = 1'b1;
    m[4].branch.kind = BR_NEXT;
    // pg5: store, two threads per cycle
    c[5] = set_fin(c[5], 4, 1, 0, 1);
    for (int l = 0; l < 2; l++) begin
      c[5] = set_fin(c[5], 2*l,     0, l, 2);
      c[5] = set_fin(c[5], 2*l + 1, 0, l, 3);
      c[5] = set_tile(c[5], l*5 + 0, OP_ADD, 2*l, 4, SRC_NOPRED, 0, 1);
      c[5] = set_tile(c[5], l*5 + 1, OP_PASS, 2*l + 1, SRC_ZERO, SRC_NOPRED, 0, 1);
      c[5] = set_fout(c[5], 2*l,     FO_ST_ADDR, l*5 + 0, l, l);
      c[5] = set_fout(c[5], 2*l + 1, FO_ST_DATA, l*5 + 1, l, l);
    end
    m[5].lat = 8'd1;
    m[5].unrolling_factor = 2'd1;
    m[5].in_regs[2] = 1'b1; m[5].in_regs[3] = 1'b1;
    m[5].num_stores = 3'd1;
    m[5].branch.kind = BR_EXIT;

    for (int p = 0; p < 6; p++) begin
      for (int w = 0; w < MD_WORDS; w++)
        q.push_back('{MD_BASE + 32'(p * 32 + w * 4), md_word(m[p], w)});
      for (int w = 0; w < CFG_WORDS; w++)
        q.push_back('{BS_BASE + 32'(p * 256 + w * 4), cfg_word(c[p], w)});
    end
    q.push_back('{PARAMS, A_BASE});
    q.push_back('{PARAMS + 4, C_BASE});
    for (int g = 0; g < n_elems; g++) q.push_back('{A_BASE + 32'(g * 4), a_val(g)});
    return q;
  endfunction
endpackage
