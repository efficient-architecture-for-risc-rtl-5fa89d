// reverser_tb: element-order reversal against a model that moves element e
// to N/EEWB-1-e, and pass-through with en = 0.
//
// The element-order reversal checked here is this design's reading of the
// paper's Reverser. Combinational.
module reverser_tb;
  localparam int N = 64;
  logic              en;
  logic [1:0]        eew_log;
  logic [N-1:0][7:0] data_in, data_out;
  logic [N-1:0]      mask_in, mask_out;
  int checks = 0, failures = 0;

  reverser #(.N(N)) dut (.*);

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int w;
      en = 1'($urandom);
      eew_log = 2'($urandom);
      w = 1 << eew_log;
      for (int i = 0; i < N; i++) begin
        data_in[i] = 8'($urandom);
        mask_in[i] = 1'($urandom);
      end
      #1;
      for (int e = 0; e < N / w; e++) begin
        for (int r = 0; r < w; r++) begin
          int src;
          src = en ? (N / w - 1 - e) * w + r : e * w + r;
          checks++;
          if (data_out[e * w + r] != data_in[src] || mask_out[e * w + r] != mask_in[src]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
