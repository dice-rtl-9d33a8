// tb_tmcu: checks the temporal memory coalescing unit on its own.
// Directed sequences: stride-1 requests of one sector merge into a single
// command carrying every word, data and thread id; a request to another
// sector, of another kind or to a word already present forces the held
// command out; with coalescing disabled every request leaves alone; a lone
// request is flushed by the timeout exactly MAX_INTERVAL+1 clock edges after
// it was taken.  A random stream then checks that every request appears in
// exactly one command with its data, and that no command mixes sectors.
module tb_tmcu;
  import dice_pkg::*;
  localparam int MI = 8;
  logic clk = 0, rst_n = 0, enable = 1, in_valid = 0, in_ready, out_valid, out_ready = 1, busy;
  thread_req_t in_req = '0;
  coal_cmd_t out_cmd;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  tmcu #(.MAX_INTERVAL(MI)) dut (.clk, .rst_n, .enable, .in_valid, .in_ready, .in_req,
                                 .out_valid, .out_ready, .out_cmd, .busy);
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  coal_cmd_t got[$];
  int cyc = 0, first_out = -1;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid && out_ready) begin got.push_back(out_cmd); if (first_out < 0) first_out = cyc; end
  end

  task automatic send(input logic [31:0] addr, input logic st, input int tid, input int dest = 1);
    @(negedge clk);                  // drive away from the sampling edge
    in_req = '0; in_req.addr = addr; in_req.is_store = st; in_req.data = addr ^ 32'h5a5a;
    in_req.tid = TID_W'(tid); in_req.dest = REG_W'(dest);
    in_valid = 1;
    forever begin
      #1;                              // let in_ready settle
      if (in_ready) begin @(posedge clk); break; end
      @(negedge clk);
    end
    #1 in_valid = 0;
  endtask
  task automatic drain(); repeat (MI + 4) @(posedge clk); #1; endtask

  initial begin #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int t0;
    repeat (2) @(posedge clk); #1 rst_n = 1; @(posedge clk); #1;
    // 1: eight stride-1 loads -> one command
    for (int w = 0; w < 8; w++) send(32'h100 + 32'(4*w), 0, w);
    drain();
    chk(got.size() == 1, $sformatf("stride-1 sector gives one command (got %0d)", got.size()));
    if (got.size() == 1) begin
      chk(got[0].wmask == 8'hFF && got[0].sector == 27'h8, "all words, right sector");
      for (int w = 0; w < 8; w++)
        chk(got[0].tid[w] == TID_W'(w) && got[0].data[w] == ((32'h100 + 32'(4*w)) ^ 32'h5a5a), "word data and tid");
    end
    got.delete();
    // 2: sector change, kind change, repeated word, destination change
    send(32'h200, 0, 1); send(32'h204, 0, 2); send(32'h300, 0, 3);   // new sector
    send(32'h304, 1, 4);                                             // store
    send(32'h304, 1, 5);                                             // same word again
    send(32'h308, 1, 6, 2);                                          // other dest
    drain();
    chk(got.size() == 5, $sformatf("5 commands for conflicting stream (got %0d)", got.size()));
    if (got.size() == 5) begin
      chk(got[0].wmask == 8'h03, "first two merged");
      chk(got[1].wmask == 8'h01 && !got[1].is_store, "load alone");
      chk(got[2].is_store && got[2].wmask == 8'h02, "store alone");
      chk(got[3].wmask == 8'h02 && got[3].tid[1] == 5, "repeated word split");
      chk(got[4].wmask == 8'h04 && got[4].dest == 2, "destination split");
    end
    got.delete();
    // 3: coalescing disabled
    enable = 0;
    for (int w = 0; w < 4; w++) send(32'h400 + 32'(4*w), 0, w);
    drain();
    chk(got.size() == 4, "disabled: one command per request");
    got.delete(); enable = 1;
    // 4: timeout timing
    first_out = -1;
    send(32'h500, 0, 9); t0 = cyc;
    drain();
    // out_valid rises MI+1 edges after the request was taken; the handshake
    // is seen on the edge after that
    chk(first_out - t0 == MI + 2, $sformatf("timeout after %0d edges (expected %0d)", first_out - t0, MI + 2));
    got.delete();
    // 5: random stream with back-pressure
    begin
      int n = 300, seen = 0;
      logic [31:0] addrs[$];
      fork
        begin
          for (int i = 0; i < n; i++) begin
            logic [31:0] a;
            a = {22'd0, 3'($urandom_range(0, 3)), 5'($urandom_range(0, 7) * 4), 2'b00};
            a = 32'h1000 + {a[31:7], a[6:2], 2'b00};
            addrs.push_back(a);
            send(a, 0, i % 512);
            if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 12)) @(posedge clk);
          end
        end
        begin
          forever begin @(posedge clk); #2 out_ready = ($urandom_range(0, 3) != 0); end
        end
      join_any
      disable fork;
      out_ready = 1;
      repeat (40) @(posedge clk);
      foreach (got[c])
        for (int w = 0; w < 8; w++)
          if (got[c].wmask[w]) begin
            int i;
            i = int'(got[c].tid[w]);
            seen++;
            chk(addrs[i] == {got[c].sector, 3'(w), 2'b00}, $sformatf("request %0d in the right sector/word", i));
          end
      chk(seen == n, $sformatf("every request delivered once (%0d of %0d)", seen, n));
      chk(!busy, "idle after drain");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
