// sifq_tb: self-checking test of the store in-flight queue.
// Random store mops are allocated. The testbench plays the register file
// (returns data derived from the read request after a random delay), the
// data organizer (returns a transformed line and mask after a random delay)
// and memory (random request back-pressure, acknowledgements returned in
// random order). Checked: every register read matches its mop, every store
// request carries its mop's address, the organizer's data and mask and the
// entry tag, requests leave in allocation order, retirement follows the ack
// of the head only, and with no stalls one mop is sent every four cycles.
//
// The paper gives the queue's job; the four-cycle issue rate checked here is
// this design's choice.
module sifq_tb;
  import earth_pkg::*;
  localparam int DEPTH = QDEPTH;
  localparam int TW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  logic alloc_valid, alloc_ready;
  mop_t alloc_mop;
  logic vrf_rd_valid, vrf_rd_ready, vrf_rd_out_valid;
  vrf_rd_t vrf_rd;
  logic [VLEN-1:0] vrf_rd_data;
  logic lsdo_valid, lsdo_out_valid;
  mop_t lsdo_mop;
  logic [MLEN-1:0] lsdo_data, lsdo_out_data;
  logic [MLENB-1:0] lsdo_out_mask;
  logic st_req_valid, st_req_ready;
  logic [AW-1:0] st_req_addr;
  logic [MLEN-1:0] st_req_data;
  logic [MLENB-1:0] st_req_mask;
  logic [TW-1:0] st_req_tag;
  logic head_valid, retire, busy;
  logic [TW-1:0] head_tag;
  logic ack_valid;
  logic [TW-1:0] ack_tag;
  mop_t mq[$];
  int   tq[$];
  int   pend_ack[$];
  bit   acked [DEPTH];
  int checks = 0, failures = 0, next_tag = 0, n_sent = 0, n_ret = 0;
  int rd_delay = -1, ls_delay = -1, fast_start = -1;
  logic [MLEN-1:0] ls_expect;

  sifq dut (.*);
  sau  u_sau (.clk, .rst_n, .ack_valid, .ack_tag, .head_valid, .head_tag, .retire);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [VLEN-1:0] rd_pattern(input vrf_rd_t r);
    logic [VLEN-1:0] d;
    for (int w = 0; w < VLEN / 32; w++) d[w*32 +: 32] = {r.vreg, r.vbyte, 8'(w), 13'(r.nfld)};
    return d;
  endfunction

  bit fast;
  initial begin
    alloc_valid = 0; alloc_mop = '0;
    vrf_rd_ready = 0; vrf_rd_out_valid = 0; vrf_rd_data = '0;
    lsdo_out_valid = 0; lsdo_out_data = '0; lsdo_out_mask = '0;
    st_req_ready = 0; ack_valid = 0; ack_tag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 30000; c++) begin
      fast = (c / 3000) % 2 == 1;
      @(negedge clk);
      alloc_valid = fast ? 1'b1 : 1'($urandom);
      alloc_mop = mop_t'({$urandom, $urandom, $urandom});
      vrf_rd_ready = fast ? 1'b1 : 1'($urandom);
      st_req_ready = fast ? 1'b1 : 1'($urandom);
      // register file returns data rd_delay cycles after a granted read
      vrf_rd_out_valid = rd_delay == 0;
      if (rd_delay >= 0) rd_delay--;
      // organizer output
      lsdo_out_valid = ls_delay == 0;
      if (ls_delay >= 0) ls_delay--;
      lsdo_out_data = ls_expect;
      lsdo_out_mask = ls_expect[MLENB-1:0] ^ ls_expect[2*MLENB-1:MLENB];
      ack_valid = 0;
      if (pend_ack.size() > 0 && (fast || $urandom_range(0, 2) == 0)) begin
        int j;
        j = fast ? 0 : $urandom_range(0, pend_ack.size() - 1);
        ack_valid = 1;
        ack_tag = TW'(pend_ack[j]);
        pend_ack.delete(j);
      end
      #1;
      checks++;
      if (alloc_ready != (mq.size() < DEPTH)) failures++;
      checks++;
      if (retire != (head_valid && acked[head_tag])) failures++;
      if (vrf_rd_valid && vrf_rd_ready) begin
        mop_t m;
        m = mq[n_sent - n_ret];
        checks++;
        if (vrf_rd.vreg != m.vreg || vrf_rd.vbyte != m.vbyte || vrf_rd.col != (m.kind == M_SEG) ||
            vrf_rd.nfld != m.nelem) failures++;
        vrf_rd_data = rd_pattern(vrf_rd);
        rd_delay = fast ? 0 : $urandom_range(0, 3);
      end
      if (lsdo_valid) begin
        checks++;
        if (lsdo_data != vrf_rd_data[MLEN-1:0] || lsdo_mop != mq[n_sent - n_ret]) failures++;
        ls_expect = ~lsdo_data ^ {16{$urandom}};
        ls_delay = fast ? 0 : $urandom_range(0, 3);
      end
      if (st_req_valid && st_req_ready) begin
        mop_t m;
        m = mq[n_sent - n_ret];
        checks++;
        if (st_req_addr != m.addr || st_req_tag != TW'(tq[n_sent - n_ret]) || st_req_data != ls_expect ||
            st_req_mask != (ls_expect[MLENB-1:0] ^ ls_expect[2*MLENB-1:MLENB])) failures++;
        if (fast) begin
          if (fast_start >= 0) begin
            checks++;
            if (c - fast_start != 4) failures++;
          end
          fast_start = c;
        end else fast_start = -1;
      end
      @(posedge clk);
      if (st_req_valid && st_req_ready) begin
        pend_ack.push_back(int'(st_req_tag));
        n_sent++;
      end
      if (retire) begin
        acked[head_tag] = 0;
        void'(mq.pop_front());
        void'(tq.pop_front());
        n_ret++;
        n_sent--;
        n_ret--;
      end
      if (ack_valid) acked[ack_tag] = 1;
      if (alloc_valid && alloc_ready) begin
        mq.push_back(alloc_mop);
        tq.push_back(next_tag);
        next_tag = (next_tag + 1) % DEPTH;
      end
    end
    checks++;
    if (n_ret != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
