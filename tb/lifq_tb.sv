// lifq_tb: self-checking test of the load inflight queue.
// Random allocations and pops are compared with a reference queue: tags are
// handed out in order modulo DEPTH, the head mop and head tag follow
// allocation order, and alloc_ready drops exactly when DEPTH mops are held.
//
// The paper gives the queue's job; depth and handshake are this design's.
module lifq_tb;
  import earth_pkg::*;
  localparam int DEPTH = QDEPTH;
  localparam int TW = $clog2(DEPTH);
  logic          clk = 0, rst_n = 0;
  logic          alloc_valid, alloc_ready, head_valid, pop;
  mop_t          alloc_mop, head_mop;
  logic [TW-1:0] alloc_tag, head_tag;
  mop_t          mq[$];
  int            tq[$];
  int checks = 0, failures = 0, n_full = 0, next_tag = 0;

  lifq dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc_valid = 0;
    pop = 0;
    alloc_mop = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      alloc_valid = 1'($urandom);
      alloc_mop   = mop_t'({$urandom, $urandom, $urandom});
      #1;
      pop = head_valid && ((c / 1000) % 2 == 1 ? 1'b1 : 1'($urandom_range(0, 3) == 0));
      #1;
      checks++;
      if (alloc_ready != (mq.size() < DEPTH)) failures++;
      if (!alloc_ready) n_full++;
      checks++;
      if (head_valid != (mq.size() > 0)) failures++;
      if (alloc_ready) begin
        checks++;
        if (alloc_tag != TW'(next_tag)) failures++;
      end
      if (head_valid && mq.size() > 0) begin
        checks++;
        if (head_mop != mq[0] || head_tag != TW'(tq[0])) failures++;
      end
      @(posedge clk);
      if (pop && mq.size() > 0) begin
        void'(mq.pop_front());
        void'(tq.pop_front());
      end
      if (alloc_valid && alloc_ready) begin
        mq.push_back(alloc_mop);
        tq.push_back(next_tag);
        next_tag = (next_tag + 1) % DEPTH;
      end
    end
    checks++;
    if (n_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
