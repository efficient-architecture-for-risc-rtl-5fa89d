// block_shifter_tb: write direction sends block q to (q+amt) mod NB; read
// direction brings it back; both checked against the model.
//
// The rotation amounts follow from the paper's register-to-bank mapping.
// Combinational.
module block_shifter_tb;
  localparam int NB = 8, BW = 64;
  logic [2:0]            amt;
  logic                  dir;
  logic [NB-1:0][BW-1:0] din, dout;
  int checks = 0, failures = 0;

  block_shifter #(.NB(NB), .BW(BW)) dut (.*);

  initial begin
    for (int it = 0; it < 2000; it++) begin
      amt = 3'($urandom);
      dir = 1'($urandom);
      for (int q = 0; q < NB; q++) din[q] = {$urandom, $urandom};
      #1;
      for (int q = 0; q < NB; q++) begin
        checks++;
        if (!dir && dout[(q + amt) % NB] != din[q]) failures++;
        if (dir && dout[q] != din[(q + amt) % NB]) failures++;
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
