// drom_tb: self-checking test of the data reorganization module.
//
// Every cycle a random legal gather or scatter enters (stride a multiple of
// EEWB, elements inside the 64-byte word). The expected result, computed
// directly from the element positions offset + m*stride, is checked exactly
// one cycle later, which also checks the one-cycle latency.
//
// The one-cycle latency checked here is this design's choice (the paper
// gives none); the gather/scatter results follow the paper's definition.
module drom_tb;
  localparam int N = 64, CW = 6;
  logic              clk = 0, rst_n = 0;
  logic              in_valid, scatter;
  logic [N-1:0][7:0] data_in;
  logic [CW:0]       stride;
  logic [1:0]        eew_log;
  logic [CW-1:0]     offset;
  logic [CW:0]       nelem;
  logic              out_valid;
  logic [N-1:0][7:0] data_out;
  logic [N-1:0]      mask_out;
  int checks = 0, failures = 0;

  drom #(.N(N), .CW(CW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic              exp_v;
  logic [N-1:0][7:0] exp_d;
  logic [N-1:0]      exp_m;

  initial begin
    in_valid = 0;
    exp_v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int w, s, off, ne;
      logic [N-1:0][7:0] d;
      logic [N-1:0][7:0] ed;
      logic [N-1:0]      em;
      @(negedge clk);
      // check the operation of the previous cycle
      checks++;
      if (out_valid !== exp_v) failures++;
      else if (exp_v && (data_out !== exp_d || mask_out !== exp_m)) begin
        failures++;
        if (failures < 5) $display("it %0d mismatch", it);
      end
      // new operation
      eew_log = 2'($urandom);
      w = 1 << eew_log;
      s = w * $urandom_range(1, (it % 2) ? 2 : 64 / w);
      off = $urandom_range(0, N - w);
      ne = (N - w - off) / s + 1;
      ne = $urandom_range(0, ne);
      for (int i = 0; i < N; i++) d[i] = 8'($urandom);
      ed = '0;
      em = '0;
      scatter = 1'($urandom);
      for (int m = 0; m < ne; m++) begin
        for (int r = 0; r < w; r++) begin
          if (!scatter) begin
            ed[m * w + r] = d[off + m * s + r];
            em[m * w + r] = 1'b1;
          end else begin
            ed[off + m * s + r] = d[m * w + r];
            em[off + m * s + r] = 1'b1;
          end
        end
      end
      in_valid = (it % 7 != 3);
      data_in = d;
      stride = (CW+1)'(s);
      offset = CW'(off);
      nelem = (CW+1)'(ne);
      exp_v = in_valid;
      exp_d = ed;
      exp_m = em;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
