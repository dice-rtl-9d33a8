// metadata_fetch_unit: fetches the metadata of one p-graph from the p-graph
// cache for the FDR stage.
//
// A p-graph's metadata occupies MD_WORDS (6) 32-bit words at
// md_base + 32*pc, i.e. one 32-byte line per p-graph (layout chosen here).
// The unit reads the words one at a time through the cache's priority port.
// It keeps the last fetched metadata: a request for the same address is
// answered in the next cycle without touching the cache, which is how an
// e-block of a second CTA on the same p-graph gets a short FDR stage.
// Handshake: req is held with md_addr until done pulses for one cycle; the
// words stay valid on `words` until the next request.
module metadata_fetch_unit
  import dice_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic [31:0] md_addr,
  output logic        done,
  output logic        reused,
  output logic [MD_WORDS-1:0][31:0] words,
  // p-graph cache port
  output logic        c_req,
  output logic [31:0] c_addr,
  input  logic        c_rsp,
  input  logic [31:0] c_data
);
  typedef enum logic [1:0] { S_IDLE, S_FETCH, S_DONE } state_e;
  state_e      state;
  logic [2:0]  idx;
  logic        have;
  logic [31:0] last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; idx <= '0; have <= 1'b0; last <= '0;
      done <= 1'b0; reused <= 1'b0; words <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (req) begin
          if (have && last == md_addr) begin
            done <= 1'b1; reused <= 1'b1; state <= S_DONE;
          end else begin
            have <= 1'b0; idx <= '0; state <= S_FETCH;
          end
        end
        S_FETCH: if (c_rsp) begin
          words[idx] <= c_data;
          if (idx == 3'(MD_WORDS - 1)) begin
            done <= 1'b1; reused <= 1'b0; have <= 1'b1; last <= md_addr;
            state <= S_DONE;
          end else idx <= idx + 3'd1;
        end
        S_DONE: if (!req) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign c_req  = (state == S_FETCH);
  assign c_addr = md_addr + {27'd0, idx, 2'b00};
endmodule
