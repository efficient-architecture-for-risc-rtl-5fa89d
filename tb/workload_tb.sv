// workload_tb: the access patterns of the evaluated benchmarks, run on the
// full-size unit with an ideal memory (always ready, in-order answers after
// a fixed delay).
//
// Each pattern is one or more vector loads followed by the matching stores:
//   unit-stride 32-bit rows (sgemm/ssymm/stpmv-like),
//   strided 32-bit with an 8-byte stride (complex parts: cgemm/ctpmv/
//   BatchMatMul-like),
//   2-field 32-bit segments (csymm-like), 3-field 8-bit segments (yuv2rgb),
//   the stride sweep of the stride-intensive programs (byte strides 2, 4,
//   ..., MLEN/2 on 8-bit elements, one full register each),
//   the field sweep of the segment-intensive programs (2..8 fields).
// For every instruction the number of memory requests must equal the number
// of (line, register) pieces the elements fall into, which is what
// coalescing promises: the count is worked out here from the addresses.
// Registers (after loads) and memory (after stores) are compared with an
// ISA reference model, and the cycles and elements per request are printed
// per pattern. The sizes are one register group per instruction: the
// benchmarks' own problem sizes are not given, and larger ones only repeat
// the same instructions. Indexed accesses (LUT4) are not supported and are
// not run.
module workload_tb;
  import earth_pkg::*;
  localparam int MEMB = 65536;

  logic clk = 0, rst_n = 0, fast = 1;
  logic ld_instr_valid, ld_instr_ready, st_instr_valid, st_instr_ready;
  vinstr_t ld_instr, st_instr;
  logic ld_req_valid, ld_req_ready, ld_resp_valid;
  logic [AW-1:0] ld_req_addr;
  logic [TAGW-1:0] ld_req_tag, ld_resp_tag;
  logic [MLEN-1:0] ld_resp_data;
  logic st_req_valid, st_req_ready, st_ack_valid;
  logic [AW-1:0] st_req_addr;
  logic [MLEN-1:0] st_req_data;
  logic [MLENB-1:0] st_req_mask;
  logic [TAGW-1:0] st_req_tag, st_ack_tag;
  logic vu_wr_valid, vu_wr_ready, vu_rd_valid, vu_rd_ready, vu_rd_out_valid;
  logic [4:0] vu_wr_vreg, vu_rd_vreg;
  logic [VLEN-1:0] vu_wr_data, vu_rd_data;
  logic [VLENB-1:0] vu_wr_mask;
  logic busy, ld_coalesced;

  earth_top dut (.*);
  mem_model #(.MEMB(MEMB)) u_mem (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [7:0] ref_mem [MEMB];
  logic [7:0] ref_reg [32][VLENB];
  int n_ldreq = 0, n_streq = 0;

  always @(posedge clk) begin
    if (ld_req_valid && ld_req_ready) n_ldreq++;
    if (st_req_valid && st_req_ready) n_streq++;
  end

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int nfields(input vinstr_t ins);
    return (ins.kind == K_SEG_UNIT || ins.kind == K_SEG_STRIDED) ? ins.nf_m1 + 1 : 1;
  endfunction

  // pieces the accessed elements fall into: a new request starts whenever
  // the line or the register changes (or, for segments, a new segment starts)
  function automatic int expected_reqs(input vinstr_t ins);
    int w, nf, s, n;
    longint pl, l;
    int pr, r;
    w = 1 << ins.eew_log;
    nf = nfields(ins);
    s = int'(ins.stride);
    n = 0;
    pl = -1;
    pr = -1;
    for (int e = 0; e < ins.vl; e++)
      for (int f = 0; f < nf; f++) begin
        l = (longint'(ins.base) + longint'(e) * s + f * w) >>> CW;
        r = (e * w) / VLENB;
        if (l != pl || (nf == 1 && r != pr) || (nf > 1 && f == 0) || (nf == 1 && (s < w && s > -w))) n++;
        pl = l;
        pr = r;
      end
    return n;
  endfunction

  task automatic apply_ref(input vinstr_t ins);
    int w, emul, nf, s;
    w = 1 << ins.eew_log;
    emul = 1 << ins.emul_log;
    nf = nfields(ins);
    s = int'(ins.stride);
    for (int e = 0; e < ins.vl; e++)
      for (int f = 0; f < nf; f++)
        for (int b = 0; b < w; b++) begin
          int g, r;
          g = int'((longint'(ins.base) + longint'(e) * s + f * w + b) & (MEMB - 1));
          r = (ins.vd + f * emul + (e * w) / VLENB) % 32;
          if (ins.store) ref_mem[g] = ref_reg[r][(e * w) % VLENB + b];
          else           ref_reg[r][(e * w) % VLENB + b] = ref_mem[g];
        end
  endtask

  task automatic wait_idle();
    int n;
    n = 0;
    while (n < 6) begin
      @(posedge clk);
      n = busy ? 0 : n + 1;
    end
  endtask

  task automatic check_state();
    for (int r = 0; r < 32; r++) begin
      @(negedge clk);
      vu_rd_valid = 1;
      vu_rd_vreg = 5'(r);
      @(posedge clk);
      @(negedge clk);
      vu_rd_valid = 0;
      for (int b = 0; b < VLENB; b++) begin
        checks++;
        if (vu_rd_data[b*8 +: 8] != ref_reg[r][b]) failures++;
      end
    end
    for (int g = 0; g < MEMB; g++) begin
      checks++;
      if (u_mem.mem[g] != ref_mem[g]) failures++;
    end
  endtask

  // run one instruction alone and check its request count
  task automatic run_one(input vinstr_t ins, output int cycles);
    int r0, exp;
    r0 = ins.store ? n_streq : n_ldreq;
    exp = expected_reqs(ins);
    cycles = 0;
    @(negedge clk);
    if (ins.store) begin
      st_instr = ins;
      st_instr_valid = 1;
    end else begin
      ld_instr = ins;
      ld_instr_valid = 1;
    end
    @(posedge clk);
    @(negedge clk);
    ld_instr_valid = 0;
    st_instr_valid = 0;
    apply_ref(ins);
    while (busy) begin
      @(posedge clk);
      cycles++;
    end
    wait_idle();
    checks++;
    if ((ins.store ? n_streq : n_ldreq) - r0 != exp) begin
      failures++;
      $display("request count %0d, expected %0d", (ins.store ? n_streq : n_ldreq) - r0, exp);
    end
  endtask

  function automatic vinstr_t mk(input bit store, input acc_kind_e kind, input int eew_log,
                                 input int emul_log, input int nf, input int vd,
                                 input int base, input int stride, input int vl);
    vinstr_t i;
    i = '0;
    i.store = store;
    i.kind = kind;
    i.eew_log = 2'(eew_log);
    i.emul_log = 2'(emul_log);
    i.nf_m1 = 3'(nf - 1);
    i.vd = 5'(vd);
    i.base = AW'(base);
    i.stride = AW'(stride);
    i.vl = VLW'(vl);
    return i;
  endfunction

  // a load then the matching store (to another area), with statistics
  task automatic pattern(input string name, input vinstr_t ld);
    vinstr_t st;
    int c_ld, c_st, q0, elems;
    q0 = n_ldreq;
    run_one(ld, c_ld);
    st = ld;
    st.store = 1;
    st.base = ld.base + 32'h6000;
    run_one(st, c_st);
    elems = ld.vl * nfields(ld);
    $display("%-34s elems %4d  load reqs %3d (%0.2f elem/req) %3d cyc  store %3d cyc",
             name, elems, n_ldreq - q0, real'(elems) / real'(n_ldreq - q0), c_ld, c_st);
  endtask

  initial begin
    ld_instr_valid = 0;
    st_instr_valid = 0;
    ld_instr = '0;
    st_instr = '0;
    vu_wr_valid = 0;
    vu_rd_valid = 0;
    vu_wr_vreg = '0;
    vu_rd_vreg = '0;
    vu_wr_data = '0;
    vu_wr_mask = '0;
    for (int g = 0; g < MEMB; g++) begin
      ref_mem[g] = 8'($urandom);
      u_mem.mem[g] = ref_mem[g];
    end
    for (int r = 0; r < 32; r++)
      for (int b = 0; b < VLENB; b++) ref_reg[r][b] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // registers start at zero: write them so the model and the unit agree
    for (int r = 0; r < 32; r++) begin
      @(negedge clk);
      vu_wr_valid = 1;
      vu_wr_vreg = 5'(r);
      vu_wr_mask = '1;
      vu_wr_data = '0;
      @(posedge clk);
    end
    @(negedge clk);
    vu_wr_valid = 0;
    repeat (4) @(posedge clk);

    pattern("unit-stride e32 (sgemm-like)",      mk(0, K_UNIT, 2, 3, 1, 8, 32'h1000, 4, 128));
    pattern("strided e32 s=8 (cgemm-like)",      mk(0, K_STRIDED, 2, 1, 1, 0, 32'h1204, 8, 32));
    pattern("strided e32 s=-8 (ctpmv-like)",     mk(0, K_STRIDED, 2, 1, 1, 2, 32'h1ffc, -8, 32));
    pattern("strided e32 s=256 (BatchMatMul)",   mk(0, K_STRIDED, 2, 0, 1, 4, 32'h2000, 256, 16));
    pattern("seg2 e32 (csymm-like)",             mk(0, K_SEG_UNIT, 2, 0, 2, 10, 32'h3000, 8, 16));
    pattern("seg3 e8 (yuv2rgb)",                 mk(0, K_SEG_UNIT, 0, 0, 3, 12, 32'h3403, 3, 64));
    for (int s = 2; s <= MLEN / 2; s *= 2)
      pattern($sformatf("stride-intensive e8 s=%0d", s), mk(0, K_STRIDED, 0, 0, 1, 16, 32'h4000 + s, s, 64));
    for (int nf = 2; nf <= 8; nf++)
      pattern($sformatf("segment-intensive e8 nf=%0d", nf), mk(0, K_SEG_UNIT, 0, 0, nf, 20, 32'h5000 + nf, nf, 64));
    check_state();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
