// cgra_fabric: the statically scheduled, spatial-only CGRA of one CP.
//
// ROWS x COLS tiles (4x5 by default: 16 PEs and, in the last column, the 4
// SFU slots).  Each tile is a switch box feeding a PE.  A tile's switch box
// sees 16 sources: the N_FIN fabric input ports (0..7), the outputs of its
// north, south, east and west neighbours (8..11), its own PE output (12), the
// constants 0 and 1 (13, 14) and the tile's immediate (15).  Longer routes go
// through PEs configured as OP_PASS.  The whole configuration (cgra_cfg_t) is
// static while a p-graph runs and comes from the active configuration memory.
//
// Input ports take a word from the register file: a register of one of the
// NT_MAX co-dispatched threads (lanes) or a word of the shared constant buffer.
// The control bit of an input is the valid bit of its lane, so an inactive
// lane's results are all invalid (a constant-buffer input, like an
// immediate, is always valid).  Output ports forward one tile's output with
// the destination kind (register writeback, load address, store address/data,
// branch predicate), lane and index taken from the configuration.
//
// Timing: the group entering at cycle t leaves at t+lat, where lat is the
// p-graph's LAT field (the number of registers the compiler placed on its
// paths).  A small ring buffer delays the group's tag (valid, base tid, lane
// mask) by the same lat so outputs can be matched to their threads.  The
// fabric never stalls: an idle dispatch cycle is a bubble with valid=0.
//
// Lint note: tools report a circular combinational path through the
// switch boxes and PEs (PE output -> neighbour/self switch-box input -> PE).
// It exists only as a possibility: a route through bypassed tiles is
// combinational, and a configuration that closed a ring of bypassed tiles
// would be a loop.  Legal configurations always place a register (switch-box
// or PE output register) in every cycle of routes; keeping that rule is the
// job of the configuration generator, so the warning stands.
module cgra_fabric
  import dice_pkg::*;
(
  input  logic                                clk,
  input  logic                                rst_n,
  input  cgra_cfg_t                           cfg,
  input  logic [7:0]                          lat,
  // dispatched group
  input  logic                                in_valid,
  input  logic [TID_W-1:0]                    in_base_tid,
  input  logic [NT_MAX-1:0]                   in_lane_mask,
  input  logic [NT_MAX-1:0][NUM_REGS+1:0][XLEN-1:0] in_regs,
  input  logic [CONST_ENTRIES-1:0][XLEN-1:0]  const_buf,
  // results, lat cycles later
  output logic                                out_valid,
  output logic [TID_W-1:0]                    out_base_tid,
  output logic [NT_MAX-1:0]                   out_lane_mask,
  output fword_t    [N_FOUT-1:0]              out_port,
  output fout_cfg_t [N_FOUT-1:0]              out_cfg
);
  fword_t [N_FIN-1:0]   fin;
  fword_t [N_TILES-1:0] tile_out;

  // ---------------------------------------------------------------- inputs
  always_comb begin
    for (int i = 0; i < N_FIN; i++) begin
      fin_cfg_t c;
      c = cfg.fin[i];
      // a constant-buffer word is valid for the whole e-block, like an
      // immediate; a register is valid only with its lane's thread
      fin[i].ctrl = c.en & (c.is_const | (in_valid & in_lane_mask[c.lane]));
      if (c.is_const)                          fin[i].data = const_buf[c.idx[4:0]];
      else if (c.idx <= REG_W'(NUM_REGS + 1))  fin[i].data = in_regs[c.lane][c.idx];
      else                                     fin[i].data = '0;
      if (!fin[i].ctrl) fin[i].data = '0;
    end
  end

  // ---------------------------------------------------------------- tiles
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int T = r * COLS + c;
      tile_cfg_t          tc;
      fword_t [SB_IN-1:0] sb_in;
      fword_t [2:0]       opnd;
      logic   [2:0][SEL_W-1:0] sel;

      assign tc = cfg.tile[T];
      always_comb begin
        for (int i = 0; i < N_FIN; i++) sb_in[i] = fin[i];
        sb_in[8]  = (r > 0)        ? tile_out[(r > 0 ? T - COLS : T)]        : '0;
        sb_in[9]  = (r < ROWS - 1) ? tile_out[(r < ROWS - 1 ? T + COLS : T)] : '0;
        sb_in[10] = (c < COLS - 1) ? tile_out[(c < COLS - 1 ? T + 1 : T)]    : '0;
        sb_in[11] = (c > 0)        ? tile_out[(c > 0 ? T - 1 : T)]           : '0;
        sb_in[12] = tile_out[T];
        sb_in[13] = '{ctrl: 1'b1, data: '0};
        sb_in[14] = '{ctrl: 1'b1, data: 32'd1};
        sb_in[15] = '{ctrl: 1'b1, data: tc.imm};
      end
      assign sel = {tc.sel_p, tc.sel_b, tc.sel_a};

      switch_box #(.N_IN(SB_IN), .N_OUT(3)) u_sb (
        .clk, .rst_n, .in(sb_in), .sel(sel), .reg_en(tc.sb_reg), .out(opnd)
      );

      processing_element u_pe (
        .clk, .rst_n, .op(tc.op), .has_pred(tc.sel_p != SEL_NONE),
        .pred_inv(tc.pred_inv), .out_reg(tc.out_reg),
        .a(opnd[0]), .b(opnd[1]), .p(opnd[2]), .y(tile_out[T])
      );
    end
  end

  // ---------------------------------------------------------------- outputs
  always_comb begin
    for (int o = 0; o < N_FOUT; o++) begin
      out_cfg[o]  = cfg.fout[o];
      out_port[o] = (cfg.fout[o].kind != FO_NONE && cfg.fout[o].tile < 5'(N_TILES))
                    ? tile_out[cfg.fout[o].tile] : '0;
    end
  end

  // ---------------------------------------------------------------- tag delay
  typedef struct packed {
    logic              v;
    logic [TID_W-1:0]  tid;
    logic [NT_MAX-1:0] m;
  } tag_t;
  tag_t       ring [256];
  logic [255:0] ring_v;
  logic [7:0] wptr, rptr;
  tag_t       tin, tout;

  assign tin  = '{v: in_valid, tid: in_base_tid, m: in_lane_mask};
  assign rptr = wptr - lat;

  always_ff @(posedge clk) ring[wptr] <= tin;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr   <= '0;
      ring_v <= '0;
    end else begin
      wptr         <= wptr + 8'd1;
      ring_v[wptr] <= in_valid;
    end
  end

  always_comb begin
    if (lat == 8'd0) tout = tin;
    else begin
      tout   = ring[rptr];
      tout.v = ring_v[rptr];
    end
  end
  assign out_valid     = tout.v;
  assign out_base_tid  = tout.tid;
  assign out_lane_mask = tout.v ? tout.m : '0;
endmodule
