// gsn_tb: self-checking test of the gather shift network.
//
// Random legal gathers: k elements at increasing input columns w_1 < ... <
// w_k are sent to output columns n_1 < ... < n_k with n_1 <= w_1 and gaps
// that never widen (n_{t+1} - n_t <= w_{t+1} - w_t). Each element carries
// its count w_t - n_t and a random payload. The expected output is built
// directly from the chosen columns, independent of the network.
//
// The expected outputs (every element lands exactly its shift count to the
// right) follow the paper's definition of the gather network; the random
// conflict-free stimulus (rising, order-preserving destinations) is this
// test's choice. Purely combinational, so no latency is checked.
module gsn_tb;
  localparam int N = 64, CW = 6, PW = 8, EW = 1 + CW + PW;
  logic [N-1:0][EW-1:0] in_elem;
  logic [N-1:0]         out_valid;
  logic [N-1:0][PW-1:0] out_pay;
  int checks = 0, failures = 0;

  gsn #(.N(N), .CW(CW), .PW(PW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0]         exp_v;
    logic [N-1:0][PW-1:0] exp_p;
    for (int it = 0; it < 3000; it++) begin
      int w, n, k;
      in_elem = '0;
      exp_v = '0;
      exp_p = '0;
      // garbage payload on invalid columns
      for (int i = 0; i < N; i++) in_elem[i][PW-1:0] = PW'($urandom);
      w = $urandom_range(0, 7);
      n = (it % 4 == 0) ? 0 : $urandom_range(0, w);
      k = 0;
      while (w < N) begin
        logic [PW-1:0] pay;
        pay = PW'($urandom);
        in_elem[w] = {1'b1, CW'(w - n), pay};
        exp_v[n] = 1'b1;
        exp_p[n] = pay;
        k++;
        begin
          int gw, gn;
          gw = $urandom_range(1, (it % 3 == 0) ? 2 : 9);
          gn = $urandom_range(1, gw);
          w += gw;
          n += gn;
        end
      end
      #1;
      checks++;
      if (out_valid !== exp_v || out_pay !== exp_p) begin
        failures++;
        if (failures < 5) $display("mismatch it=%0d v=%h exp=%h", it, out_valid, exp_v);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
