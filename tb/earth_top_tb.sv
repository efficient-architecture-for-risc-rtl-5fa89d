// earth_top_tb: end-to-end, full-size test of the memory-access unit.
//
// The top is built with its default (P-Config) sizes. A behavioural memory
// (random back-pressure, out-of-order answers) sits on the request ports
// and the testbench drives the datapath register port. All 32 registers
// are first filled through the datapath port. Then batches of random load
// instructions (unit-stride, strided with positive, negative, zero and
// small strides, unit and strided segments; all element widths, EMUL 1..8)
// and batches of random store instructions are run. A reference model
// applies each instruction with the ISA definition; after a load batch
// every register is read back through the datapath port and compared, after
// a store batch all of memory is compared. Loads and stores are not mixed
// within a batch because the unit does not order loads against stores.
//
// During batches the datapath port keeps asking for the register file
// (reads during stores, mask-less writes during loads) to exercise the
// arbitration without changing the architectural state.
//
// Every mechanism is counted and the test fails if one never happened:
// coalesced strided load and store mops, negative-stride reversal, segment
// mops split across lines, column writes and column reads, out-of-order
// load responses and store acks, a full LIFQ, a full instruction queue, and
// back-pressure on both datapath port directions. A last load batch runs
// with an ideal memory and checks the unit-stride rate: one line per cycle.
//
// The paper gives no cycle counts for the unit; the one-line-per-cycle
// unit-stride rate checked here is this design's own target.
module earth_top_tb;
  import earth_pkg::*;
  localparam int MEMB = 65536;

  logic clk = 0, rst_n = 0, fast = 0;
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

  // mechanism counters
  int n_ld_coal = 0, n_st_coal = 0, n_neg = 0, n_seg_split = 0, n_col_wr = 0, n_col_rd = 0;
  int n_lifq_full = 0, n_iq_full = 0, n_vu_wr_bp = 0, n_vu_rd_bp = 0;
  bit vu_noise = 0, vu_noise_wr = 0;

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (ld_coalesced) n_ld_coal++;
    if (dut.u_vlsu.sas_mv && dut.u_vlsu.sas_mr && dut.u_vlsu.sas_mop.kind == M_STRIDED &&
        dut.u_vlsu.sas_mop.nelem > 1) n_st_coal++;
    if (dut.u_vlsu.las_mv && dut.u_vlsu.las_mr && dut.u_vlsu.las_mop.neg) n_neg++;
    if (dut.u_vlsu.sas_mv && dut.u_vlsu.sas_mr && dut.u_vlsu.sas_mop.neg) n_neg++;
    if (dut.u_vlsu.las_mv && dut.u_vlsu.las_mr && dut.u_vlsu.las_mop.kind == M_SEG &&
        dut.u_vlsu.las_mop.f0 != 0) n_seg_split++;
    if (dut.l_wv && dut.l_w.col) n_col_wr++;
    if (dut.l_rv && dut.l_rr && dut.l_r.col) n_col_rd++;
    if (!dut.u_vlsu.lq_ar) n_lifq_full++;
    if (ld_instr_valid && !ld_instr_ready) n_iq_full++;
    if (vu_wr_valid && !vu_wr_ready) n_vu_wr_bp++;
    if (vu_rd_valid && !vu_rd_ready) n_vu_rd_bp++;
  end

  // datapath-port noise during batches
  always @(negedge clk) if (vu_noise) begin
    vu_rd_valid = 0;
    vu_wr_valid = 0;
    if ($urandom_range(0, 1) == 0) begin
      if (vu_noise_wr) begin
        vu_wr_valid = 1;
        vu_wr_vreg  = 5'($urandom);
        vu_wr_mask  = '0;
      end else begin
        vu_rd_valid = 1;
        vu_rd_vreg  = 5'($urandom);
      end
    end
  end

  function automatic vinstr_t rand_instr(input bit store);
    vinstr_t ins;
    int w, emul, nf, vl, s;
    ins = '0;
    ins.store = store;
    ins.kind = acc_kind_e'($urandom_range(0, 3));
    ins.eew_log = 2'($urandom);
    w = 1 << ins.eew_log;
    ins.emul_log = 2'($urandom);
    emul = 1 << ins.emul_log;
    if (ins.kind == K_SEG_UNIT || ins.kind == K_SEG_STRIDED) begin
      if (emul == 8) begin
        ins.emul_log = 2;
        emul = 4;
      end
      nf = $urandom_range(2, 8 / emul);
      ins.nf_m1 = 3'(nf - 1);
      ins.vd = 5'(emul * $urandom_range(0, (32 - nf * emul) / emul));
    end else begin
      nf = 1;
      ins.vd = 5'(emul * $urandom_range(0, 32 / emul - 1));
    end
    vl = $urandom_range(1, VLENB * emul / w);
    if ($urandom_range(0, 2) == 0) vl = VLENB * emul / w;
    ins.vl = VLW'(vl);
    case ($urandom_range(0, 4))
      0: s = w * $urandom_range(1, 4);
      1: s = -w * $urandom_range(1, 16);
      2: s = w * $urandom_range(0, 64);
      3: s = nf * w * $urandom_range(1, 3);
      default: s = -nf * w * $urandom_range(1, 3);
    endcase
    if (ins.kind == K_UNIT) s = w;
    if (ins.kind == K_SEG_UNIT) s = nf * w;
    ins.stride = AW'(s);
    ins.base = AW'(w * $urandom_range(0, MEMB / w - 1));
    return ins;
  endfunction

  // ISA reference for one instruction
  task automatic apply_ref(input vinstr_t ins);
    int w, emul, nf, s;
    w = 1 << ins.eew_log;
    emul = 1 << ins.emul_log;
    nf = (ins.kind == K_SEG_UNIT || ins.kind == K_SEG_STRIDED) ? ins.nf_m1 + 1 : 1;
    s = int'(ins.stride);
    for (int e = 0; e < ins.vl; e++)
      for (int f = 0; f < nf; f++)
        for (int b = 0; b < w; b++) begin
          longint a;
          int g, r;
          a = longint'(ins.base) + longint'(e) * s + f * w + b;
          g = int'(a & (MEMB - 1));
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
      n = (busy || ld_instr_valid || st_instr_valid) ? 0 : n + 1;
    end
  endtask

  task automatic check_regs();
    for (int r = 0; r < 32; r++) begin
      @(negedge clk);
      vu_rd_valid = 1;
      vu_rd_vreg = 5'(r);
      @(posedge clk);
      #1;
      @(negedge clk);
      vu_rd_valid = 0;
      checks++;
      if (!vu_rd_out_valid) failures++;
      for (int b = 0; b < VLENB; b++) begin
        checks++;
        if (vu_rd_data[b*8 +: 8] != ref_reg[r][b]) begin
          failures++;
          if (failures < 10) $display("reg v%0d byte %0d: %02x expected %02x", r, b, vu_rd_data[b*8 +: 8], ref_reg[r][b]);
        end
      end
    end
  endtask

  task automatic check_mem();
    int bad;
    bad = 0;
    for (int g = 0; g < MEMB; g++) begin
      checks++;
      if (u_mem.mem[g] != ref_mem[g]) begin
        failures++;
        if (bad++ < 5) $display("mem %0h: %02x expected %02x", g, u_mem.mem[g], ref_mem[g]);
      end
    end
  endtask

  task automatic run_batch(input bit store, input int n);
    vinstr_t q[$];
    for (int i = 0; i < n; i++) q.push_back(rand_instr(store));
    vu_noise = 1;
    vu_noise_wr = !store;
    foreach (q[i]) begin
      @(negedge clk);
      if (store) begin
        st_instr = q[i];
        st_instr_valid = 1;
      end else begin
        ld_instr = q[i];
        ld_instr_valid = 1;
      end
      @(posedge clk);
      while (store ? !st_instr_ready : !ld_instr_ready) @(posedge clk);
      @(negedge clk);
      ld_instr_valid = 0;
      st_instr_valid = 0;
      apply_ref(q[i]);
    end
    wait_idle();
    vu_noise = 0;
    @(negedge clk);
    vu_rd_valid = 0;
    vu_wr_valid = 0;
    if (store) check_mem();
    else       check_regs();
  endtask

  initial begin
    int t0, t1, lines;
    vinstr_t ins;
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
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill the registers through the datapath port
    for (int r = 0; r < 32; r++) begin
      @(negedge clk);
      vu_wr_valid = 1;
      vu_wr_vreg = 5'(r);
      vu_wr_mask = '1;
      for (int b = 0; b < VLENB; b++) begin
        ref_reg[r][b] = 8'($urandom);
        vu_wr_data[b*8 +: 8] = ref_reg[r][b];
      end
      @(posedge clk);
    end
    @(negedge clk);
    vu_wr_valid = 0;
    repeat (4) @(posedge clk);
    check_regs();
    for (int b = 0; b < 12; b++) begin
      run_batch(0, 12);
      run_batch(1, 12);
    end
    // rate check: 8-register unit-stride load from an aligned base with an
    // ideal memory must take one line per cycle at the request port
    fast = 1;
    @(negedge clk);
    ins = '0;
    ins.kind = K_UNIT;
    ins.eew_log = 0;
    ins.emul_log = 3;
    ins.vd = 5'd8;
    ins.base = 32'h1000;
    ins.stride = 1;
    ins.vl = VLW'(VLENB * 8);
    ld_instr = ins;
    ld_instr_valid = 1;
    @(posedge clk);
    @(negedge clk);
    ld_instr_valid = 0;
    apply_ref(ins);
    t0 = -1;
    lines = 0;
    for (int c = 0; c < 100 && lines < 8; c++) begin
      @(posedge clk);
      if (ld_req_valid && ld_req_ready) begin
        if (t0 < 0) t0 = c;
        lines++;
        t1 = c;
      end
    end
    wait_idle();
    @(negedge clk);
    check_regs();
    checks++;
    if (lines != 8 || t1 - t0 != 7) failures++;
    $display("unit-stride: %0d lines issued in cycles %0d..%0d", lines, t0, t1);
    fast = 0;
    $display("mechanisms: ld_coal %0d st_coal %0d neg %0d seg_split %0d col_wr %0d col_rd %0d",
             n_ld_coal, n_st_coal, n_neg, n_seg_split, n_col_wr, n_col_rd);
    $display("            ld_ooo %0d st_ooo %0d lifq_full %0d iq_full %0d vu_wr_bp %0d vu_rd_bp %0d",
             u_mem.n_ld_ooo, u_mem.n_st_ooo, n_lifq_full, n_iq_full, n_vu_wr_bp, n_vu_rd_bp);
    checks += 12;
    if (n_ld_coal == 0) failures++;
    if (n_st_coal == 0) failures++;
    if (n_neg == 0) failures++;
    if (n_seg_split == 0) failures++;
    if (n_col_wr == 0) failures++;
    if (n_col_rd == 0) failures++;
    if (u_mem.n_ld_ooo == 0) failures++;
    if (u_mem.n_st_ooo == 0) failures++;
    if (n_lifq_full == 0) failures++;
    if (n_iq_full == 0) failures++;
    if (n_vu_wr_bp == 0) failures++;
    if (n_vu_rd_bp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
