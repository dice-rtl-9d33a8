// pgraph_cache: the p-graph cache of a CP (the counterpart of a GPU's
// instruction cache), holding p-graph metadata and CGRA bitstreams.
//
// Direct mapped, LINES lines of one 32-byte sector (8 words).  Two read
// clients share it: port 0 (Metadata Fetch Unit) has priority over port 1
// (Bitstream Fetch + Load).  A client holds req with a word address until it
// sees rsp, which comes one cycle after a hit.  On a miss the cache sends one
// sector read on its memory port (ready/valid), waits for the response,
// fills the line and then serves the waiting request.  The paper names the
// cache and its role; its organisation and size are this design's choice.
module pgraph_cache
  import dice_pkg::*;
#(
  parameter int unsigned LINES = 128      // 4 KB
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [1:0]             req,
  input  logic [1:0][31:0]       addr,
  output logic [1:0]             rsp,
  output logic [31:0]            rdata,
  // memory side
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output mem_req_t               mem_req,
  input  logic                   mem_rsp_valid,
  input  mem_rsp_t               mem_rsp
);
  localparam int IW = $clog2(LINES);
  localparam int TW = 27 - IW;

  logic [SECTOR_WORDS-1:0][31:0] data [LINES];
  logic [TW-1:0]                 tags [LINES];
  logic [LINES-1:0]              valid;

  typedef enum logic [1:0] { S_LOOKUP, S_MISS, S_WAIT } state_e;
  state_e       state;
  logic         c;                   // chosen client
  logic [31:0]  a;
  logic [IW-1:0] li;
  logic [TW-1:0] lt;
  logic         hit;

  assign c   = req[0] ? 1'b0 : 1'b1;
  assign a   = addr[c];
  assign li  = a[5 +: IW];
  assign lt  = a[31 -: TW];
  assign hit = valid[li] && tags[li] == lt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOOKUP; valid <= '0; rsp <= '0; rdata <= '0;
    end else begin
      rsp <= '0;
      unique case (state)
        S_LOOKUP: if (req != 2'b00 && rsp == 2'b00) begin
          if (hit) begin
            rsp[c] <= 1'b1;
            rdata  <= data[li][a[4:2]];
          end else state <= S_MISS;
        end
        S_MISS: if (mem_req_ready) state <= S_WAIT;
        S_WAIT: if (mem_rsp_valid) begin
          data[li]  <= mem_rsp.rdata;
          tags[li]  <= lt;
          valid[li] <= 1'b1;
          state     <= S_LOOKUP;
        end
        default: state <= S_LOOKUP;
      endcase
    end
  end

  always_comb begin
    mem_req_valid     = (state == S_MISS);
    mem_req           = '0;
    mem_req.addr      = {a[31:5], 5'd0};
    mem_req.wmask     = '1;
    mem_req.tag.src   = SRC_ICACHE;
  end
endmodule
