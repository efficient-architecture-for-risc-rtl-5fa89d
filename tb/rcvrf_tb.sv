// rcvrf_tb: self-checking test of the row/column-accessible register file.
//
// A testbench model holds the 32 registers as plain byte arrays. Random row
// writes (with byte enables), row reads, column (segment) writes and column
// reads are applied; a column access touches register vreg + f*EMUL, bytes
// vbyte .. vbyte+EEWB-1, for fields f0 .. f0+nfld-1, with field f packed at
// byte (f-f0)*EEWB of the port. Read data is checked one cycle after the
// request. It also checks the bank placement printed in the paper's
// figure 9 style: register i, block j sits in bank (i+j) mod 8.
//
// Row and column access follow the paper's register file; the read and
// write timing checked here is this design's choice.
module rcvrf_tb;
  import earth_pkg::*;
  logic            clk = 0, rst_n = 0;
  logic            wr_valid, rd_valid, rd_out_valid;
  vrf_wr_t         wr;
  vrf_rd_t         rd;
  logic [VLEN-1:0] rd_data;
  logic [7:0]      model [NVREG][VLENB];
  int checks = 0, failures = 0;
  int n_colw = 0, n_colr = 0;

  rcvrf dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void rand_col(output logic [4:0] v, output logic [CW-1:0] vb, output logic [1:0] ew,
                                   output logic [1:0] em, output logic [2:0] f0, output int nf);
    int w, emul, nft;
    ew = 2'($urandom);
    w = 1 << ew;
    em = 2'($urandom_range(0, 3));
    emul = 1 << em;
    nft = 8 / emul;                     // fields allowed with this EMUL
    nf = $urandom_range(1, nft);
    f0 = 3'($urandom_range(0, nft - nf));
    v = 5'($urandom);
    vb = CW'(w * $urandom_range(0, VLENB / w - 1));
  endfunction

  logic            exp_v;
  logic [VLEN-1:0] exp_d;

  initial begin
    wr_valid = 0;
    rd_valid = 0;
    exp_v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise every register by row writes
    for (int r = 0; r < NVREG; r++) begin
      @(negedge clk);
      wr = '0;
      wr.vreg = 5'(r);
      wr.mask = '1;
      for (int b = 0; b < VLENB; b++) begin
        wr.data[8*b +: 8] = 8'($urandom);
        model[r][b] = wr.data[8*b +: 8];
      end
      wr_valid = 1;
    end
    @(negedge clk);
    wr_valid = 0;
    @(negedge clk);
    // placement check through the hierarchy: register i block j in bank (i+j)%8
    for (int i = 0; i < NVREG; i++) begin
      for (int j = 0; j < VLEN / ELEN; j++) begin
        logic [ELEN-1:0] expw;
        int k, row;
        for (int b = 0; b < ELEN / 8; b++) expw[8*b +: 8] = model[i][j * ELEN / 8 + b];
        k = (i + j) % NBANKS;
        row = ((i / NBANKS) * (VLEN / ELEN) + i % NBANKS) % (VLEN * NVREG / (ELEN * NBANKS));
        checks++;
        case (k)
          0: if (dut.u_vrf.g_bank[0].mem[row] !== expw) failures++;
          1: if (dut.u_vrf.g_bank[1].mem[row] !== expw) failures++;
          2: if (dut.u_vrf.g_bank[2].mem[row] !== expw) failures++;
          3: if (dut.u_vrf.g_bank[3].mem[row] !== expw) failures++;
          4: if (dut.u_vrf.g_bank[4].mem[row] !== expw) failures++;
          5: if (dut.u_vrf.g_bank[5].mem[row] !== expw) failures++;
          6: if (dut.u_vrf.g_bank[6].mem[row] !== expw) failures++;
          default: if (dut.u_vrf.g_bank[7].mem[row] !== expw) failures++;
        endcase
      end
    end
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (!rd_out_valid || rd_data !== exp_d) begin
          failures++;
          if (failures < 5) $display("read mismatch it %0d", it);
        end
      end
      wr_valid = 0;
      rd_valid = 0;
      exp_v = 0;
      // A write lands two clock edges after it is presented, so reads are
      // issued with one idle cycle after each write.
      if (it % 4 == 1 || it % 4 == 3) begin
        // idle
      end else if (it % 4 == 0) begin
        // write
        wr = '0;
        if ($urandom_range(0, 1) == 0) begin
          wr.vreg = 5'($urandom);
          for (int b = 0; b < VLENB; b++) begin
            wr.data[8*b +: 8] = 8'($urandom);
            wr.mask[b] = 1'($urandom);
            if (wr.mask[b]) model[wr.vreg][b] = wr.data[8*b +: 8];
          end
        end else begin
          int nf, w, emul;
          wr.col = 1;
          rand_col(wr.vreg, wr.vbyte, wr.eew_log, wr.emul_log, wr.f0, nf);
          wr.nfld = (CW+1)'(nf);
          w = 1 << wr.eew_log;
          emul = 1 << wr.emul_log;
          for (int b = 0; b < VLENB; b++) wr.data[8*b +: 8] = 8'($urandom);
          for (int f = wr.f0; f < wr.f0 + nf; f++)
            for (int r = 0; r < w; r++)
              model[5'(wr.vreg + f * emul)][wr.vbyte + r] = wr.data[8 * ((f - wr.f0) * w + r) +: 8];
          n_colw++;
        end
        wr_valid = 1;
      end else begin
        rd = '0;
        exp_d = '0;
        if ($urandom_range(0, 1) == 0) begin
          rd.vreg = 5'($urandom);
          for (int b = 0; b < VLENB; b++) exp_d[8*b +: 8] = model[rd.vreg][b];
        end else begin
          int nf, w, emul;
          rd.col = 1;
          rand_col(rd.vreg, rd.vbyte, rd.eew_log, rd.emul_log, rd.f0, nf);
          rd.nfld = (CW+1)'(nf);
          w = 1 << rd.eew_log;
          emul = 1 << rd.emul_log;
          for (int f = rd.f0; f < rd.f0 + nf; f++)
            for (int r = 0; r < w; r++)
              exp_d[8 * ((f - rd.f0) * w + r) +: 8] = model[5'(rd.vreg + f * emul)][rd.vbyte + r];
          n_colr++;
        end
        rd_valid = 1;
        exp_v = 1;
      end
    end
    checks++;
    if (n_colw == 0 || n_colr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
