// shifted_vrf_tb: random per-bank writes with byte enables, then reads with
// independent per-bank rows, against a testbench copy of the banks.
//
// The bank/row mapping checked here is the paper's mapping function at the
// default sizes.
module shifted_vrf_tb;
  localparam int NB = 8, EL = 64, NR = 32, RW = 5, EB = 8;
  logic                  clk = 0;
  logic [NB-1:0]         wr_en;
  logic [NB-1:0][RW-1:0] wr_row, rd_row;
  logic [NB-1:0][EB-1:0] wr_be;
  logic [NB-1:0][EL-1:0] wr_data, rd_data;
  logic [EL-1:0]         model [NB][NR];
  int checks = 0, failures = 0;

  shifted_vrf #(.NBANKS(NB), .ELEN(EL), .NROWS(NR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill everything once
    for (int r = 0; r < NR; r++) begin
      @(negedge clk);
      wr_en = '1;
      wr_be = '1;
      for (int k = 0; k < NB; k++) begin
        wr_row[k] = RW'(r);
        wr_data[k] = {$urandom, $urandom};
        model[k][r] = wr_data[k];
      end
    end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      for (int k = 0; k < NB; k++) begin
        rd_row[k] = RW'($urandom);
      end
      #1;
      for (int k = 0; k < NB; k++) begin
        checks++;
        if (rd_data[k] !== model[k][rd_row[k]]) failures++;
      end
      wr_en = NB'($urandom);
      for (int k = 0; k < NB; k++) begin
        wr_row[k] = RW'($urandom);
        wr_be[k] = EB'($urandom);
        wr_data[k] = {$urandom, $urandom};
        if (wr_en[k])
          for (int b = 0; b < EB; b++)
            if (wr_be[k][b]) model[k][wr_row[k]][8*b +: 8] = wr_data[k][8*b +: 8];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
