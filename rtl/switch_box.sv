// switch_box: one CGRA switch box (SB).
//
// A crossbar switch drives N_OUT outputs, each selecting any of N_IN inputs.
// Every output can be registered or taken straight from the crossbar: a
// register and a 2:1 mux per output, both set by the tile's configuration
// memory.  This follows the SB drawing of the DICE machine model (crossbar,
// then a register and a bypass mux per output).  The selection is static for
// the whole p-graph, so the register choice is how the compiler balances path
// latencies.  Outputs with reg_en=1 appear one cycle after their input; the
// register is reset to zero.
module switch_box
  import dice_pkg::*;
#(
  parameter int unsigned N_IN  = SB_IN,
  parameter int unsigned N_OUT = 3,
  parameter int unsigned SW    = $clog2(N_IN)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  fword_t [N_IN-1:0]          in,
  input  logic   [N_OUT-1:0][SW-1:0] sel,
  input  logic   [N_OUT-1:0]         reg_en,
  output fword_t [N_OUT-1:0]         out
);
  fword_t [N_OUT-1:0] xbar, q;

  always_comb begin
    for (int o = 0; o < N_OUT; o++) xbar[o] = in[sel[o]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= '0;
    else        q <= xbar;
  end

  always_comb begin
    for (int o = 0; o < N_OUT; o++) out[o] = reg_en[o] ? q[o] : xbar[o];
  end
endmodule
