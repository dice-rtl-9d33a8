// bitstream_fetch_load: the Bitstream Fetch + Load unit of the FDR stage.
//
// Given the decoded BITSTREAM_ADDR and BITSTREAM_LENGTH of a p-graph, it first
// checks whether either configuration memory bank already holds that
// bitstream; if so it reports that bank at once (no fetch, as when a CTA
// follows another on the same p-graph).  Otherwise it fetches the bitstream
// word by word from the p-graph cache and writes it into the bank that is not
// executing (`busy_bank` names the executing bank when `busy` is set), zero
// filling the words beyond the bitstream's length so unused tiles and ports
// are idle.  The residency check and loading into the inactive bank follow
// the paper; the one-word-per-cycle fetch is this design's choice.
// Handshake: req is held with its fields until done; done pulses for one
// cycle with the bank to execute.  A hit answers in the cycle after req; a
// load takes CFG_WORDS cycles plus the cache latency of every fetched word.
module bitstream_fetch_load
  import dice_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic [31:0] addr,
  input  logic [7:0]  length,       // bytes
  input  logic        busy,
  input  logic        busy_bank,
  output logic        done,
  output logic        done_bank,
  output logic        loaded,       // 1: this request loaded a bitstream
  // configuration memory side
  input  logic [1:0]       bank_valid,
  input  logic [1:0][31:0] bank_addr,
  output logic        ld_start,
  output logic        ld_bank,
  output logic [31:0] ld_addr,
  output logic        wr_en,
  output logic [$clog2(CFG_WORDS)-1:0] wr_idx,
  output logic [31:0] wr_data,
  output logic        ld_done,
  // p-graph cache read port
  output logic        c_req,
  output logic [31:0] c_addr,
  input  logic        c_rsp,
  input  logic [31:0] c_data
);
  typedef enum logic [1:0] { S_IDLE, S_LOAD, S_DONE } state_e;
  state_e state;
  logic [$clog2(CFG_WORDS):0] idx;
  logic [6:0]  nwords;
  logic        bank, hit0, hit1, in_range;
  assign in_range = idx < nwords;

  assign nwords = 7'((int'(length) + 3) / 4);
  assign hit0   = bank_valid[0] && bank_addr[0] == addr;
  assign hit1   = bank_valid[1] && bank_addr[1] == addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; idx <= '0; bank <= 1'b0;
      done <= 1'b0; done_bank <= 1'b0; loaded <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (req) begin
          if (hit0 || hit1) begin
            done <= 1'b1; done_bank <= hit1; loaded <= 1'b0; state <= S_DONE;
          end else begin
            bank  <= busy ? !busy_bank : 1'b0;
            idx   <= '0;
            state <= S_LOAD;
          end
        end
        S_LOAD: begin
          if (idx == ($clog2(CFG_WORDS)+1)'(CFG_WORDS)) begin
            done <= 1'b1; done_bank <= bank; loaded <= 1'b1; state <= S_DONE;
          end else if (!in_range) begin
            idx <= idx + 1'b1;        // zero fill
          end else if (c_rsp) begin
            idx <= idx + 1'b1;
          end
        end
        S_DONE: if (!req) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  

  assign ld_start = (state == S_IDLE) && req && !(hit0 || hit1);
  assign ld_bank  = (state == S_IDLE) ? (busy ? !busy_bank : 1'b0) : bank;
  assign ld_addr  = addr;
  assign c_req    = (state == S_LOAD) && in_range && idx < ($clog2(CFG_WORDS)+1)'(CFG_WORDS);
  assign c_addr   = addr + {idx, 2'b00};
  assign wr_en    = (state == S_LOAD) && idx < ($clog2(CFG_WORDS)+1)'(CFG_WORDS) && (!in_range || c_rsp);
  assign wr_idx   = idx[$clog2(CFG_WORDS)-1:0];
  assign wr_data  = in_range ? c_data : '0;
  assign ld_done  = (state == S_LOAD) && idx == ($clog2(CFG_WORDS)+1)'(CFG_WORDS);
endmodule
