// lsdo_tb: self-checking test of the load/store data organizer.
//
// Each cycle a random load mop and a random store mop enter (unit-stride,
// strided with positive or negative stride, segment). The expected register
// image (load) and line image (store) are built from the element mapping:
// element m of a strided mop lies at line byte offset + m*stride (or, for a
// negative stride, N - EEWB - offset - m*stride) and at register byte
// vbyte + m*EEWB. Results are checked exactly one cycle later.
//
// The one-cycle latency checked here is this design's choice; the order of
// the stages follows the paper's load and store flows.
module lsdo_tb;
  import earth_pkg::*;
  localparam int N = MLENB;
  logic              clk = 0, rst_n = 0;
  logic              ld_in_valid, st_in_valid;
  mop_t              ld_mop, st_mop;
  logic [N-1:0][7:0] ld_data, st_data;
  logic              ld_out_valid, st_out_valid;
  vrf_wr_t           ld_out;
  mop_t              st_out_mop;
  logic [N-1:0][7:0] st_out_data;
  logic [N-1:0]      st_out_mask;
  int checks = 0, failures = 0;
  int n_kind [3];

  lsdo dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Random legal mop; returns the map elem byte -> (line byte, reg byte).
  function automatic mop_t rand_mop(input logic store, output int lpos[N], output int rpos[N], output int nb);
    mop_t m;
    int w, s, ne, k;
    m = '0;
    m.store = store;
    k = $urandom_range(0, 2);
    m.kind = mop_kind_e'(k);
    m.eew_log = 2'($urandom);
    w = 1 << m.eew_log;
    nb = 0;
    if (m.kind == M_UNIT) begin
      int off, vb, len;
      off = w * $urandom_range(0, N / w - 1);
      vb = w * $urandom_range(0, N / w - 1);
      len = (N - off < N - vb) ? N - off : N - vb;
      ne = $urandom_range(1, len / w);
      m.offset = CW'(off);
      m.vbyte = CW'(vb);
      m.nelem = (CW+1)'(ne);
      m.stride = (CW+1)'(w);
      for (int i = 0; i < ne * w; i++) begin
        lpos[i] = off + i;
        rpos[i] = vb + i;
      end
      nb = ne * w;
    end else if (m.kind == M_STRIDED) begin
      int off, vb, mx;
      s = w * $urandom_range(1, ($urandom_range(0, 1) != 0) ? 2 : N / w);
      off = w * $urandom_range(0, N / w - 1);
      mx = (N - w - off) / s + 1;
      vb = w * $urandom_range(0, N / w - 1);
      if ((N - vb) / w < mx) mx = (N - vb) / w;
      ne = $urandom_range(1, mx);
      m.neg = 1'($urandom);
      m.offset = CW'(off);
      m.vbyte = CW'(vb);
      m.nelem = (CW+1)'(ne);
      m.stride = (CW+1)'(s);
      for (int e = 0; e < ne; e++) begin
        for (int r = 0; r < w; r++) begin
          lpos[e * w + r] = (m.neg ? N - w - off - e * s : off + e * s) + r;
          rpos[e * w + r] = vb + e * w + r;
        end
      end
      nb = ne * w;
    end else begin
      int off, nf;
      nf = $urandom_range(1, 8);
      off = w * $urandom_range(0, N / w - 1);
      if (nf > (N - off) / w) nf = (N - off) / w;
      m.offset = CW'(off);
      m.nelem = (CW+1)'(nf);
      m.vbyte = CW'(w * $urandom_range(0, N / w - 1));
      m.f0 = 3'($urandom_range(0, 8 - nf));
      for (int i = 0; i < nf * w; i++) begin
        lpos[i] = off + i;
        rpos[i] = i;
      end
      nb = nf * w;
    end
    m.addr = AW'($urandom) & ~AW'(N - 1);
    return m;
  endfunction

  logic              e_lv, e_sv;
  vrf_wr_t           e_lw;
  mop_t              e_smop;
  logic [N-1:0][7:0] e_sd;
  logic [N-1:0]      e_sm;

  initial begin
    ld_in_valid = 0;
    st_in_valid = 0;
    e_lv = 0;
    e_sv = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int lpos[N], rpos[N], nb;
      @(negedge clk);
      checks++;
      if (ld_out_valid !== e_lv) failures++;
      else if (e_lv && (ld_out.data !== e_lw.data || ld_out.mask !== e_lw.mask || ld_out.col !== e_lw.col
                        || ld_out.vreg !== e_lw.vreg || ld_out.vbyte !== e_lw.vbyte)) begin
        failures++;
        if (failures < 5) $display("load mismatch it %0d", it);
      end
      checks++;
      if (st_out_valid !== e_sv) failures++;
      else if (e_sv && (st_out_data !== e_sd || st_out_mask !== e_sm || st_out_mop !== e_smop)) begin
        failures++;
        if (failures < 5) $display("store mismatch it %0d kind %0d", it, e_smop.kind);
      end
      // load
      ld_mop = rand_mop(1'b0, lpos, rpos, nb);
      n_kind[ld_mop.kind]++;
      for (int i = 0; i < N; i++) ld_data[i] = 8'($urandom);
      e_lw = '0;
      e_lw.col = ld_mop.kind == M_SEG;
      e_lw.vreg = ld_mop.vreg;
      e_lw.vbyte = ld_mop.vbyte;
      for (int i = 0; i < nb; i++) begin
        e_lw.data[8 * rpos[i] +: 8] = ld_data[lpos[i]];
        e_lw.mask[rpos[i]] = 1'b1;
      end
      ld_in_valid = (it % 5 != 2);
      e_lv = ld_in_valid;
      // store
      st_mop = rand_mop(1'b1, lpos, rpos, nb);
      for (int i = 0; i < N; i++) st_data[i] = 8'($urandom);
      e_sd = '0;
      e_sm = '0;
      for (int i = 0; i < nb; i++) begin
        e_sd[lpos[i]] = st_data[rpos[i]];
        e_sm[lpos[i]] = 1'b1;
      end
      e_smop = st_mop;
      st_in_valid = (it % 3 != 1);
      e_sv = st_in_valid;
    end
    checks++;
    if (n_kind[0] == 0 || n_kind[1] == 0 || n_kind[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
