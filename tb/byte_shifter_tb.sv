// byte_shifter_tb: rotation against out[(p+amt) mod N] = in[p].
//
// The rotation checked here is this design's reading of the paper's Byte
// Shifter. Combinational.
module byte_shifter_tb;
  localparam int N = 64;
  logic [5:0]        amt;
  logic [N-1:0][7:0] data_in, data_out;
  logic [N-1:0]      mask_in, mask_out;
  int checks = 0, failures = 0;

  byte_shifter #(.N(N)) dut (.*);

  initial begin
    for (int it = 0; it < 2000; it++) begin
      amt = 6'($urandom);
      for (int i = 0; i < N; i++) begin
        data_in[i] = 8'($urandom);
        mask_in[i] = 1'($urandom);
      end
      #1;
      for (int p = 0; p < N; p++) begin
        checks++;
        if (data_out[(p + amt) % N] != data_in[p] || mask_out[(p + amt) % N] != mask_in[p]) failures++;
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
