// scg_tb: self-checking test of shift count generation.
//
// Random stride, element width, offset and element count; every byte's
// count and valid bit are compared with (stride-EEWB)*floor(i/EEWB)+offset
// evaluated in the testbench. Also checks the paper's worked example
// (stride 4, EEWB 2, offset 2 -> counts 2,2,4,4,6,6,8,8).
//
// The reference is the paper's shift-count formula with i taken as the
// compact-side byte, as in the paper's worked example. Combinational.
module scg_tb;
  localparam int N = 64, CW = 6;
  logic [CW:0]          stride;
  logic [1:0]           eew_log;
  logic [CW-1:0]        offset;
  logic [CW:0]          nelem;
  logic [N-1:0][CW-1:0] cnt;
  logic [N-1:0]         cnt_valid;
  int checks = 0, failures = 0;

  scg #(.N(N), .CW(CW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    stride = 4; eew_log = 1; offset = 2; nelem = 4;
    #1;
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (cnt[i] != CW'(2 + 2 * (i / 2)) || !cnt_valid[i]) failures++;
    end
    checks++;
    if (cnt_valid[8]) failures++;
    for (int it = 0; it < 5000; it++) begin
      int eewb, s, c, nb;
      eew_log = 2'($urandom);
      eewb = 1 << eew_log;
      s = eewb * $urandom_range(1, 64 / eewb);
      stride = (CW+1)'(s);
      offset = CW'($urandom);
      nelem = (CW+1)'($urandom_range(0, 64 / eewb));
      nb = nelem * eewb;
      #1;
      for (int i = 0; i < N; i++) begin
        c = (s - eewb) * (i / eewb) + offset;
        checks++;
        if (cnt_valid[i] != ((i < nb) && (i + c < N))) failures++;
        else if (cnt_valid[i] && cnt[i] != CW'(c)) failures++;
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
