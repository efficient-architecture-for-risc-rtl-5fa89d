// addr_seq_tb: self-checking test of the address sequencer.
//
// Random unit-stride, strided (positive, negative, zero and small strides)
// and segment instructions are split; mop_ready is toggled randomly. From
// every mop the testbench reconstructs, element by element (field by field
// for segments), the memory address and the register byte, and compares
// them with the ISA definition (address base + e*stride (+ f*EEWB), element
// e of field f in register vd + f*EMUL + e*EEWB/VLENB). Each mop must lie in
// one aligned line, and the number of mops must equal that of a greedy
// element-by-element coalescing model. One mop per cycle is checked too.
//
// The address definitions are those of the vector ISA quoted in the paper;
// the coalescing rule (one aligned line, one register) is this design's
// reading of the paper's coalescing.
module addr_seq_tb;
  import earth_pkg::*;
  logic    clk = 0, rst_n = 0;
  logic    in_valid, in_ready, mop_valid, mop_ready, busy;
  vinstr_t in_instr;
  mop_t    mop;
  int checks = 0, failures = 0;
  int n_coal = 0, n_neg = 0, n_split_seg = 0;

  addr_seq dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int line_of(input longint a);
    return int'(a >>> CW);
  endfunction

  initial begin
    in_valid = 0;
    mop_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      vinstr_t ins;
      int w, nf, emul, vl, s, segs, e, f, nmops, exp_mops, cycles;
      longint base;
      ins = '0;
      ins.kind = acc_kind_e'($urandom_range(0, 3));
      ins.eew_log = 2'($urandom);
      w = 1 << ins.eew_log;
      ins.vd = 5'($urandom);
      base = longint'(w) * $urandom_range(0, 4000);
      ins.base = AW'(base);
      case ($urandom_range(0, 3))
        0: s = w * $urandom_range(1, 3);
        1: s = -w * $urandom_range(1, 20);
        2: s = w * $urandom_range(0, 100);
        default: s = w * $urandom_range(1, 8);
      endcase
      ins.stride = AW'(s);
      if (ins.kind == K_SEG_UNIT || ins.kind == K_SEG_STRIDED) begin
        ins.emul_log = 2'($urandom_range(0, 3));
        emul = 1 << ins.emul_log;
        nf = $urandom_range(1, 8 / emul);
        ins.nf_m1 = 3'(nf - 1);
        vl = $urandom_range(1, VLENB * emul / w);
        if (ins.kind == K_SEG_UNIT) s = nf * w;
      end else begin
        ins.emul_log = 2'($urandom_range(0, 3));
        emul = 1 << ins.emul_log;
        nf = 1;
        vl = $urandom_range(1, VLENB * emul / w);
        if (ins.kind == K_UNIT) s = w;
      end
      ins.vl = VLW'(vl);
      // greedy model of the number of mops
      exp_mops = 0;
      if (ins.kind == K_UNIT || ins.kind == K_STRIDED) begin
        e = 0;
        while (e < vl) begin
          int k;
          k = 1;
          while (e + k < vl && (s >= w || -s >= w) &&
                 line_of(base + longint'(e + k) * s) == line_of(base + longint'(e) * s) &&
                 ((e + k) * w) / VLENB == (e * w) / VLENB) k++;
          exp_mops++;
          e += k;
        end
      end else begin
        for (int i = 0; i < vl; i++) begin
          f = 0;
          while (f < nf) begin
            int k;
            k = 1;
            while (f + k < nf && line_of(base + longint'(i) * s + (f + k) * w) ==
                                 line_of(base + longint'(i) * s + f * w)) k++;
            exp_mops++;
            if (f != 0) n_split_seg++;
            f += k;
          end
        end
      end
      // issue
      @(negedge clk);
      in_instr = ins;
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      nmops = 0;
      cycles = 0;
      e = 0;    // next element (unit/strided) or segment
      f = 0;    // next field
      while (busy || mop_valid) begin
        mop_ready = ((it % 2) == 0) ? 1'b1 : 1'($urandom);
        #1;
        cycles++;
        if (mop_valid && mop_ready) begin
          nmops++;
          if (mop.kind == M_SEG) begin
            for (int q = 0; q < mop.nelem; q++) begin
              longint a;
              int fq, reg_i, rb;
              fq = mop.f0 + q;
              a = longint'(mop.addr) + mop.offset + q * w;
              checks++;
              if (fq != f || AW'(a) != AW'(base + longint'(e) * s + fq * w)) failures++;
              reg_i = ins.vd + fq * emul + (e * w) / VLENB;
              rb = (e * w) % VLENB;
              checks++;
              if (5'(mop.vreg + fq * emul) != 5'(reg_i) || mop.vbyte != CW'(rb)) failures++;
              f++;
              if (f == nf) begin
                f = 0;
                e++;
              end
            end
          end else begin
            if (mop.nelem > 1 && mop.kind == M_STRIDED) n_coal++;
            if (mop.neg) n_neg++;
            for (int q = 0; q < mop.nelem; q++) begin
              longint a;
              int gb;
              a = mop.neg ? longint'(mop.addr) + (MLENB - w - mop.offset) - q * longint'(mop.stride)
                          : longint'(mop.addr) + mop.offset + q * longint'(mop.stride);
              checks++;
              if (AW'(a) != AW'(base + longint'(e) * s)) begin
                failures++;
                if (failures < 5) $display("addr mismatch it %0d e %0d", it, e);
              end
              gb = int'(mop.vreg) * VLENB + mop.vbyte + q * w;
              checks++;
              if (5'(gb / VLENB) != 5'(ins.vd + (e * w) / VLENB) || gb % VLENB != (e * w) % VLENB) failures++;
              e++;
            end
          end
        end
        @(negedge clk);
        mop_ready = 0;
        if (cycles > 5000) break;
      end
      checks++;
      if (e != vl || nmops != exp_mops) begin
        failures++;
        if (failures < 8) $display("it %0d kind %0d: elems %0d/%0d mops %0d/%0d", it, ins.kind, e, vl, nmops, exp_mops);
      end
      // with mop_ready held high, one mop per cycle
      if (it % 2 == 0) begin
        checks++;
        if (cycles != nmops) failures++;
      end
    end
    checks++;
    if (n_coal == 0 || n_neg == 0 || n_split_seg == 0) failures++;
    $display("coalesced strided mops %0d, negative-stride mops %0d, split segments %0d", n_coal, n_neg, n_split_seg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
