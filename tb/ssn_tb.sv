// ssn_tb: self-checking test of the scatter shift network.
//
// Random legal scatters: elements at increasing input columns n_t move to
// output columns w_t >= n_t with gaps that never narrow. The count of each
// element is w_t - n_t; the expected output is built from the chosen
// columns.
//
// The expected outputs (every element lands exactly its shift count to the
// left) follow the paper's definition of the scatter network; the random
// order-preserving stimulus is this test's choice. Combinational.
module ssn_tb;
  localparam int N = 64, CW = 6, PW = 8, EW = 1 + CW + PW;
  logic [N-1:0][EW-1:0] in_elem;
  logic [N-1:0]         out_valid;
  logic [N-1:0][PW-1:0] out_pay;
  int checks = 0, failures = 0;

  ssn #(.N(N), .CW(CW), .PW(PW)) dut (.*);

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
      int w, n;
      in_elem = '0;
      exp_v = '0;
      exp_p = '0;
      for (int i = 0; i < N; i++) in_elem[i][PW-1:0] = PW'($urandom);
      w = $urandom_range(0, 7);
      n = (it % 4 == 0) ? 0 : $urandom_range(0, w);
      while (w < N) begin
        logic [PW-1:0] pay;
        pay = PW'($urandom);
        in_elem[n] = {1'b1, CW'(w - n), pay};
        exp_v[w] = 1'b1;
        exp_p[w] = pay;
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
