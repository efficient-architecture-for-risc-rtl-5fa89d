// lrob_tb: self-checking test of the load reorder buffer.
// Tags are allocated in order (as the LIFQ does); responses for outstanding
// tags arrive in random order with random data. The head must become ready
// exactly one cycle after its response is written, must return that
// response's data, and is released in order. Out-of-order arrivals (a
// response for a tag younger than the head) are counted and must occur.
//
// The paper gives the buffer's job; the one-cycle visibility checked here is
// this design's choice.
module lrob_tb;
  import earth_pkg::*;
  localparam int DEPTH = QDEPTH;
  localparam int TW = $clog2(DEPTH);
  logic            clk = 0, rst_n = 0;
  logic            resp_valid, head_ready, release_head;
  logic [TW-1:0]   resp_tag, head_tag;
  logic [MLEN-1:0] resp_data, head_data;
  logic [MLEN-1:0] exp_data [DEPTH];
  bit              got [DEPTH];
  int              pend[$];     // allocated tags without a response
  int checks = 0, failures = 0, n_ooo = 0, head = 0, outstanding = 0, next_tag = 0;

  lrob dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    resp_valid = 0;
    release_head = 0;
    resp_tag = '0;
    resp_data = '0;
    head_tag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      // allocate new tags while space remains
      if (outstanding < DEPTH && $urandom_range(0, 1) == 0) begin
        pend.push_back(next_tag);
        got[next_tag] = 0;
        next_tag = (next_tag + 1) % DEPTH;
        outstanding++;
      end
      resp_valid = 0;
      if (pend.size() > 0 && $urandom_range(0, 2) != 0) begin
        int j;
        j = $urandom_range(0, pend.size() - 1);
        resp_valid = 1;
        resp_tag = TW'(pend[j]);
        for (int w = 0; w < MLEN / 32; w++) resp_data[w*32 +: 32] = $urandom;
        if (pend[j] != head) n_ooo++;
        pend.delete(j);
      end
      head_tag = TW'(head);
      #1;
      checks++;
      if (head_ready != (outstanding > 0 && got[head])) failures++;
      release_head = head_ready && $urandom_range(0, 3) != 0;
      if (head_ready) begin
        checks++;
        if (head_data != exp_data[head]) failures++;
      end
      @(posedge clk);
      if (release_head) begin
        got[head] = 0;
        head = (head + 1) % DEPTH;
        outstanding--;
      end
      if (resp_valid) begin
        got[resp_tag] = 1;
        exp_data[resp_tag] = resp_data;
      end
    end
    checks++;
    if (n_ooo == 0) failures++;
    $display("out-of-order responses %0d", n_ooo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
