// sau_tb: self-checking test of the store acknowledge unit.
// Store mops are issued in order with consecutive tags; acknowledgements
// come back in random order. retire must rise exactly when the oldest store
// (the head) has been acknowledged, one cycle after the ack, and stores
// retire strictly in order even when younger acks arrive first.
//
// The paper gives the unit's job; the one-cycle retirement checked here is
// this design's choice.
module sau_tb;
  import earth_pkg::*;
  localparam int DEPTH = QDEPTH;
  localparam int TW = $clog2(DEPTH);
  logic          clk = 0, rst_n = 0;
  logic          ack_valid, head_valid, retire;
  logic [TW-1:0] ack_tag, head_tag;
  bit            acked [DEPTH];
  int            pend[$];
  int checks = 0, failures = 0, n_ooo = 0, head = 0, outstanding = 0, next_tag = 0, n_ret = 0;

  sau dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ack_valid = 0;
    ack_tag = '0;
    head_valid = 0;
    head_tag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      if (outstanding < DEPTH && $urandom_range(0, 1) == 0) begin
        pend.push_back(next_tag);
        acked[next_tag] = 0;
        next_tag = (next_tag + 1) % DEPTH;
        outstanding++;
      end
      ack_valid = 0;
      if (pend.size() > 0 && $urandom_range(0, 2) == 0) begin
        int j;
        j = $urandom_range(0, pend.size() - 1);
        ack_valid = 1;
        ack_tag = TW'(pend[j]);
        if (pend[j] != head) n_ooo++;
        pend.delete(j);
      end
      head_valid = outstanding > 0;
      head_tag = TW'(head);
      #1;
      checks++;
      if (retire != (outstanding > 0 && acked[head])) failures++;
      @(posedge clk);
      if (retire) begin
        acked[head] = 0;
        head = (head + 1) % DEPTH;
        outstanding--;
        n_ret++;
      end
      if (ack_valid) acked[ack_tag] = 1;
    end
    checks++;
    if (n_ooo == 0 || n_ret < 1000) failures++;
    $display("out-of-order acks %0d, retired %0d", n_ooo, n_ret);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
