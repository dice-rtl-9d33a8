// sync_fifo: a synchronous FIFO with ready/valid on both sides, used for the
// per-port request FIFOs of the LDST unit.  `free` counts empty slots, which
// is the credit the dispatcher checks before issuing threads.  Data written
// is readable in the next cycle.  Reset empties it.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  T                       in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output T                       out_data,
  output logic [$clog2(DEPTH):0] free
);
  localparam int AW = $clog2(DEPTH);
  T              mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;
  logic          push, pop;

  assign in_ready  = cnt < (AW+1)'(DEPTH);
  assign out_valid = cnt != 0;
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign free      = (AW+1)'(DEPTH) - cnt;

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
endmodule
