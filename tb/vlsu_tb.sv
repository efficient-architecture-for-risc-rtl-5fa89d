// vlsu_tb: self-checking test of the load/store unit on its own.
//
// The register file is replaced by a behavioural row-only register array
// (reads granted at random, data one cycle after the grant); memory is the
// behavioural model with random back-pressure and out-of-order answers.
// Random unit-stride and strided loads and stores (all widths, EMUL 1..8,
// positive, negative, zero and small strides) are run in batches and
// compared with an ISA reference: registers after load batches, memory
// after store batches. Register writes must arrive exactly one cycle after
// the load data organizer takes the LROB head. Coalesced mops, negative
// strides, out-of-order responses/acks and a full LIFQ must all occur.
//
// The flows follow the paper's load and store paths; the one-cycle step from
// reorder buffer to register write is this design's choice.
module vlsu_tb;
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
  logic vrf_wr_valid, vrf_rd_valid, vrf_rd_ready, vrf_rd_out_valid;
  vrf_wr_t vrf_wr;
  vrf_rd_t vrf_rd;
  logic [VLEN-1:0] vrf_rd_data;
  logic ld_busy, st_busy, ld_coalesced;

  vlsu dut (.*);
  mem_model #(.MEMB(MEMB)) u_mem (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [7:0] ref_mem [MEMB];
  logic [7:0] ref_reg [32][VLENB];
  logic [7:0] regs [32][VLENB];
  int n_coal = 0, n_neg = 0, n_lifq_full = 0, n_wr = 0;
  bit pop_d = 0;

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural register file
  always @(negedge clk) vrf_rd_ready = $urandom_range(0, 2) != 0;
  always @(posedge clk) begin
    vrf_rd_out_valid <= vrf_rd_valid && vrf_rd_ready;
    if (vrf_rd_valid && vrf_rd_ready)
      for (int b = 0; b < VLENB; b++) vrf_rd_data[b*8 +: 8] <= regs[vrf_rd.vreg][b];
    if (rst_n) begin
      // latency: a write follows every LROB pop by exactly one cycle
      checks++;
      if (vrf_wr_valid != pop_d) failures++;
      pop_d <= dut.lq_pop;
      if (vrf_wr_valid) begin
        n_wr++;
        checks++;
        if (vrf_wr.col) failures++;
        for (int b = 0; b < VLENB; b++)
          if (vrf_wr.mask[b]) regs[vrf_wr.vreg][b] = vrf_wr.data[b*8 +: 8];
      end
      if (ld_coalesced) n_coal++;
      if (dut.las_mv && dut.las_mr && dut.las_mop.neg) n_neg++;
      if (!dut.lq_ar) n_lifq_full++;
    end
  end

  function automatic vinstr_t rand_instr(input bit store);
    vinstr_t ins;
    int w, emul, vl, s;
    ins = '0;
    ins.store = store;
    ins.kind = $urandom_range(0, 1) ? K_STRIDED : K_UNIT;
    ins.eew_log = 2'($urandom);
    w = 1 << ins.eew_log;
    ins.emul_log = 2'($urandom);
    emul = 1 << ins.emul_log;
    ins.vd = 5'(emul * $urandom_range(0, 32 / emul - 1));
    vl = $urandom_range(1, VLENB * emul / w);
    ins.vl = VLW'(vl);
    case ($urandom_range(0, 3))
      0: s = w * $urandom_range(1, 4);
      1: s = -w * $urandom_range(1, 16);
      2: s = w * $urandom_range(0, 64);
      default: s = -w;
    endcase
    if (ins.kind == K_UNIT) s = w;
    ins.stride = AW'(s);
    ins.base = AW'(w * $urandom_range(0, MEMB / w - 1));
    return ins;
  endfunction

  task automatic apply_ref(input vinstr_t ins);
    int w, s;
    w = 1 << ins.eew_log;
    s = int'(ins.stride);
    for (int e = 0; e < ins.vl; e++)
      for (int b = 0; b < w; b++) begin
        int g, r;
        g = int'((longint'(ins.base) + longint'(e) * s + b) & (MEMB - 1));
        r = (ins.vd + (e * w) / VLENB) % 32;
        if (ins.store) ref_mem[g] = ref_reg[r][(e * w) % VLENB + b];
        else           ref_reg[r][(e * w) % VLENB + b] = ref_mem[g];
      end
  endtask

  task automatic run_batch(input bit store, input int n);
    int idle;
    for (int i = 0; i < n; i++) begin
      vinstr_t ins;
      ins = rand_instr(store);
      @(negedge clk);
      if (store) begin
        st_instr = ins;
        st_instr_valid = 1;
      end else begin
        ld_instr = ins;
        ld_instr_valid = 1;
      end
      @(posedge clk);
      while (store ? !st_instr_ready : !ld_instr_ready) @(posedge clk);
      @(negedge clk);
      ld_instr_valid = 0;
      st_instr_valid = 0;
      apply_ref(ins);
    end
    idle = 0;
    while (idle < 4) begin
      @(posedge clk);
      idle = (ld_busy || st_busy) ? 0 : idle + 1;
    end
    @(negedge clk);
    if (store) begin
      for (int g = 0; g < MEMB; g++) begin
        checks++;
        if (u_mem.mem[g] != ref_mem[g]) failures++;
      end
    end else begin
      for (int r = 0; r < 32; r++)
        for (int b = 0; b < VLENB; b++) begin
          checks++;
          if (regs[r][b] != ref_reg[r][b]) failures++;
        end
    end
  endtask

  initial begin
    ld_instr_valid = 0;
    st_instr_valid = 0;
    ld_instr = '0;
    st_instr = '0;
    vrf_rd_out_valid = 0;
    vrf_rd_data = '0;
    for (int g = 0; g < MEMB; g++) begin
      ref_mem[g] = 8'($urandom);
      u_mem.mem[g] = ref_mem[g];
    end
    for (int r = 0; r < 32; r++)
      for (int b = 0; b < VLENB; b++) begin
        ref_reg[r][b] = 8'($urandom);
        regs[r][b] = ref_reg[r][b];
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 10; b++) begin
      run_batch(0, 10);
      run_batch(1, 10);
    end
    $display("writes %0d coalesced %0d neg %0d ld_ooo %0d st_ooo %0d lifq_full %0d",
             n_wr, n_coal, n_neg, u_mem.n_ld_ooo, u_mem.n_st_ooo, n_lifq_full);
    checks++;
    if (n_coal == 0 || n_neg == 0 || u_mem.n_ld_ooo == 0 || u_mem.n_st_ooo == 0 || n_lifq_full == 0)
      failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
