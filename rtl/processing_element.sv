// processing_element: one CGRA PE (also used for the SFU column).
//
// The PE takes three operands chosen for it by its switch box: A, B and the
// 1-bit predicate source P.  Its ALU performs the configured word operation
// and its result is either registered or bypassed, chosen by a mux set from the
// configuration memory, as in the PE drawing of the DICE machine model.  Every
// value carries a control bit next to its 32 data bits.  The result's control
// bit is the AND of the operands' control bits and of the predicate (the
// predicate source's "data != 0", optionally inverted); it is what later
// enables a register write or marks a memory request valid.  OP_SEL is the
// select (phi) operation used for predicated execution: it returns A when the
// predicate holds, else B, and is not gated by the predicate.
//
// The paper's PEs execute INT, FP or special-function operations; this RTL
// carries the integer operation set only (see the README).  Timing: with
// out_reg=0 the result follows the operands in the same cycle; with
// out_reg=1 it appears one cycle later.  The register is reset to zero.
//
// Lint note: inside the array this PE's result feeds switch boxes that can
// feed it back when both are bypassed; see cgra_fabric for why the reported
// combinational ring stands (configurations must not close it).
module processing_element
  import dice_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  pe_op_e op,
  input  logic   has_pred,
  input  logic   pred_inv,
  input  logic   out_reg,
  input  fword_t a,
  input  fword_t b,
  input  fword_t p,
  output fword_t y
);
  logic [XLEN-1:0] r;
  logic            pred, uses_b;
  logic [63:0]     prod;
  fword_t          res, q;

  assign pred   = ((p.data != '0) ^ pred_inv) & p.ctrl;
  assign prod   = $signed({{32{a.data[31]}}, a.data}) * $signed({{32{b.data[31]}}, b.data});
  assign uses_b = !(op inside {OP_NOP, OP_PASS});

  always_comb begin
    unique case (op)
      OP_PASS: r = a.data;
      OP_ADD:  r = a.data + b.data;
      OP_SUB:  r = a.data - b.data;
      OP_MUL:  r = prod[31:0];
      OP_MULH: r = prod[63:32];
      OP_AND:  r = a.data & b.data;
      OP_OR:   r = a.data | b.data;
      OP_XOR:  r = a.data ^ b.data;
      OP_SHL:  r = a.data << b.data[4:0];
      OP_SHR:  r = a.data >> b.data[4:0];
      OP_SRA:  r = $unsigned($signed(a.data) >>> b.data[4:0]);
      OP_SLT:  r = {31'd0, $signed(a.data) < $signed(b.data)};
      OP_SLTU: r = {31'd0, a.data < b.data};
      OP_EQ:   r = {31'd0, a.data == b.data};
      OP_NE:   r = {31'd0, a.data != b.data};
      OP_MIN:  r = ($signed(a.data) < $signed(b.data)) ? a.data : b.data;
      OP_MAX:  r = ($signed(a.data) < $signed(b.data)) ? b.data : a.data;
      OP_SEL:  r = pred ? a.data : b.data;
      default: r = '0;
    endcase
    res.data = r;
    if (op == OP_NOP)      res.ctrl = 1'b0;
    else if (op == OP_SEL) res.ctrl = a.ctrl & b.ctrl & (p.ctrl | !has_pred);
    else res.ctrl = a.ctrl & (b.ctrl | !uses_b) & (pred | !has_pred);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= res;
  end

  assign y = out_reg ? q : res;
endmodule
